// fperr_bypass: forwarding of FPERR to an instruction in Decode that reads it.
//
// In a pipeline the FPERR value produced by an fpadd is written to the
// register only at Writeback, but a move-from-FPERR right behind it reads
// FPERR in Decode. The paper's example is exactly this: fpadd in Execute and
// the move in Decode, so the value must be bypassed from the adder. This
// block picks the youngest in-flight FPERR write of the precision being read:
// the one in Execute (straight from the adder), else the one waiting in
// Writeback, else the register itself. Writes of the other precision go to
// the other FPERR register and are ignored.
//
// Interface: purely combinational. Each source gives a write enable, the
// precision and the 64-bit data; `src` reports which source was used, for
// performance counting and for tests. The three-stage arrangement (Decode,
// Execute, Writeback) is this design's; the paper's textbook pipeline also
// has a Memory stage, which an FP add does not use.
module fperr_bypass
  import rebits_pkg::*;
(
  input  prec_e           rd_prec,
  input  logic [FLEN-1:0] reg_data,
  input  logic            ex_we,
  input  prec_e           ex_prec,
  input  logic [FLEN-1:0] ex_data,
  input  logic            wb_we,
  input  prec_e           wb_prec,
  input  logic [FLEN-1:0] wb_data,
  output logic [FLEN-1:0] data,
  output logic [1:0]      src     // 0 register, 1 Execute, 2 Writeback
);

  always_comb begin
    if (ex_we && ex_prec == rd_prec) begin
      data = ex_data;
      src  = 2'd1;
    end else if (wb_we && wb_prec == rd_prec) begin
      data = wb_data;
      src  = 2'd2;
    end else begin
      data = reg_data;
      src  = 2'd0;
    end
  end

endmodule
