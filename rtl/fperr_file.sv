// fperr_file: the dedicated FPERR architectural registers, one per precision
// (FPERR32 and FPERR64), as the paper proposes for ISAs with several fpadd
// widths.
//
// Every fpadd overwrites the FPERR of its precision with its rounding error;
// software that wants an error must move it out before the next fpadd of that
// precision. The registers are part of the architectural state and are saved
// and restored at a context switch; a restore arrives here through the same
// write port. The decision whether a given write happens (the REBits mode bit,
// which lets the FPERR update be switched off) is made upstream, so this block
// just keeps the state.
//
// Packed operations extend packing to FPERR, so each register is as wide as a
// floating point register (FLEN = 128 bits): FPERR32 holds four binary32
// errors, FPERR64 two binary64 errors; a scalar fpadd fills lane 0 and the
// pipeline zeroes the other lanes.
//
// Interface: one write port (we, wr_prec, wr_data) taking effect at the rising
// clock edge, one combinational read port selected by rd_prec, and both
// registers as outputs. Both registers reset to +0.0 on rst_n low (synchronous, active low), a
// choice of this design: the paper does not say what FPERR holds at reset.
module fperr_file
  import rebits_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  prec_e           wr_prec,
  input  logic [FLEN-1:0] wr_data,
  input  prec_e           rd_prec,
  output logic [FLEN-1:0] rd_data,
  output logic [FLEN-1:0] fperr32,
  output logic [FLEN-1:0] fperr64
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fperr32 <= '0;
      fperr64 <= '0;
    end else if (we) begin
      if (wr_prec == PREC_32) fperr32 <= wr_data;
      else                    fperr64 <= wr_data;
    end
  end

  always_comb rd_data = (rd_prec == PREC_32) ? fperr32 : fperr64;

endmodule
