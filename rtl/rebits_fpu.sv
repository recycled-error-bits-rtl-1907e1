// rebits_fpu: floating point add unit with Recycled Error Bits (REBits).
//
// Every fpadd writes its rounded sum to a floating point register, as usual,
// and additionally writes the exact rounding error of that sum, an IEEE-754
// number of the same precision, to a dedicated architectural register FPERR.
// There is one FPERR per precision (FPERR32, FPERR64); the next fpadd of that
// precision overwrites it. Software reads the error with a move-from-FPERR
// (OP_MFERR) and restores FPERR after a context switch with a
// move-to-FPERR (OP_MTERR). A mode bit, rebits_en, switches the FPERR update
// off when software does not use it; an fpadd issued with it low leaves FPERR
// unchanged.
//
// Pipeline: instructions enter Decode one per cycle (in_valid/in_instr; the
// fetch stage is outside this unit), spend one cycle in Decode, where
// registers and FPERR are read, one in Execute, where the REBits adder of the
// instruction's precision computes sum and error in a single cycle, and one in
// Writeback, where the register file and FPERR are written. Results of
// Execute and Writeback are forwarded to Decode, for the floating point
// registers and, through fperr_bypass, for FPERR; so a move-from-FPERR can
// directly follow its fpadd and there are no stalls. An instruction's
// register write is visible on the wb_* ports in its Writeback cycle, two
// cycles after it was accepted.
//
// Registers and FPERR are FLEN = 128 bits wide, as SSE registers. A packed
// instruction (in_instr.vec) works on all four binary32 or both binary64
// lanes, and the FPERR of its precision receives all lane errors; a scalar
// instruction works on lane 0 and writes zeros to the other lanes of its
// results (this design's choice; SSE scalar adds keep the upper lanes).
// OP_LOAD writes an immediate into a register; it stands in for the load path
// of a core. The instruction set, the stage count and the register count are
// this design's choices; the adder, FPERR, its bypass and the mode bit follow
// the paper.
module rebits_fpu
  import rebits_pkg::*;
#(
  parameter int unsigned NREGS = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            rebits_en,
  input  logic            in_valid,
  input  instr_t          in_instr,
  output logic            wb_valid,
  output logic [4:0]      wb_rd,
  output logic [FLEN-1:0] wb_data,
  output logic [FLEN-1:0] fperr32,
  output logic [FLEN-1:0] fperr64
);

  localparam int unsigned AW = $clog2(NREGS);

  // ---------------------------------------------------------------- Decode
  logic   d_valid, d_en;
  instr_t d_i;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_valid <= 1'b0;
      d_en    <= 1'b0;
      d_i     <= '0;
    end else begin
      d_valid <= in_valid;
      d_en    <= rebits_en;
      d_i     <= in_instr;
    end
  end

  // Execute stage registers.
  logic            e_valid, e_en;
  instr_t          e_i;
  logic [FLEN-1:0] e_a, e_b, e_fperr;
  // Execute stage results.
  logic            e_rd_we, e_fperr_we;
  logic [FLEN-1:0] e_rd_data, e_fperr_data;
  // Writeback stage registers.
  logic            w_rd_we, w_fperr_we;
  logic [4:0]      w_rd;
  prec_e           w_prec;
  logic [FLEN-1:0] w_rd_data, w_fperr_data;

  logic [FLEN-1:0] rf_a, rf_b, d_a, d_b, fperr_reg, d_fperr;

  fp_regfile #(.NREGS(NREGS)) u_rf (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (w_rd_we),
    .waddr (AW'(w_rd)),
    .wdata (w_rd_data),
    .raddr1(AW'(d_i.rs1)),
    .rdata1(rf_a),
    .raddr2(AW'(d_i.rs2)),
    .rdata2(rf_b)
  );

  fperr_file u_fperr (
    .clk    (clk),
    .rst_n  (rst_n),
    .we     (w_fperr_we),
    .wr_prec(w_prec),
    .wr_data(w_fperr_data),
    .rd_prec(d_i.prec),
    .rd_data(fperr_reg),
    .fperr32(fperr32),
    .fperr64(fperr64)
  );

  fperr_bypass u_byp (
    .rd_prec (d_i.prec),
    .reg_data(fperr_reg),
    .ex_we   (e_fperr_we),
    .ex_prec (e_i.prec),
    .ex_data (e_fperr_data),
    .wb_we   (w_fperr_we),
    .wb_prec (w_prec),
    .wb_data (w_fperr_data),
    .data    (d_fperr),
    .src     ()
  );

  // Register operand forwarding: Execute result first, then Writeback.
  function automatic logic [FLEN-1:0] fwd(logic [4:0] rs, logic [FLEN-1:0] rf_val);
    if (e_rd_we && e_i.rd == rs)      return e_rd_data;
    else if (w_rd_we && w_rd == rs)   return w_rd_data;
    else                              return rf_val;
  endfunction

  always_comb begin
    d_a = fwd(d_i.rs1, rf_a);
    d_b = fwd(d_i.rs2, rf_b);
  end

  // --------------------------------------------------------------- Execute
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      e_valid <= 1'b0;
      e_en    <= 1'b0;
      e_i     <= '0;
      e_a     <= '0;
      e_b     <= '0;
      e_fperr <= '0;
    end else begin
      e_valid <= d_valid;
      e_en    <= d_en;
      e_i     <= d_i;
      e_a     <= d_a;
      e_b     <= d_b;
      e_fperr <= d_fperr;
    end
  end

  logic [FLEN-1:0] add_sum, add_err;

  rebits_simd_add u_add (
    .prec(e_i.prec),
    .a   (e_a),
    .b   (e_b),
    .sum (add_sum),
    .err (add_err)
  );

  // Scalar results keep lane 0 only.
  function automatic logic [FLEN-1:0] lanes(instr_t i, logic [FLEN-1:0] x);
    if (i.vec)                return x;
    else if (i.prec == PREC_32) return {{(FLEN-32){1'b0}}, x[31:0]};
    else                      return {{(FLEN-64){1'b0}}, x[63:0]};
  endfunction

  always_comb begin
    e_rd_we      = 1'b0;
    e_fperr_we   = 1'b0;
    e_rd_data    = '0;
    e_fperr_data = '0;
    if (e_valid) begin
      unique case (e_i.op)
        OP_FPADD: begin
          e_rd_we      = 1'b1;
          e_rd_data    = lanes(e_i, add_sum);
          e_fperr_we   = e_en;
          e_fperr_data = lanes(e_i, add_err);
        end
        OP_MFERR: begin
          e_rd_we   = 1'b1;
          e_rd_data = lanes(e_i, e_fperr);
        end
        OP_MTERR: begin
          e_fperr_we   = 1'b1;
          e_fperr_data = lanes(e_i, e_a);
        end
        OP_LOAD: begin
          e_rd_we   = 1'b1;
          e_rd_data = lanes(e_i, e_i.imm);
        end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------- Writeback
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_rd_we      <= 1'b0;
      w_fperr_we   <= 1'b0;
      w_rd         <= '0;
      w_prec       <= PREC_32;
      w_rd_data    <= '0;
      w_fperr_data <= '0;
    end else begin
      w_rd_we      <= e_rd_we;
      w_fperr_we   <= e_fperr_we;
      w_rd         <= e_i.rd;
      w_prec       <= e_i.prec;
      w_rd_data    <= e_rd_data;
      w_fperr_data <= e_fperr_data;
    end
  end

  assign wb_valid = w_rd_we;
  assign wb_rd    = w_rd;
  assign wb_data  = w_rd_data;

  // Register specifiers must name an existing register.
  always_ff @(posedge clk) begin
    if (rst_n && in_valid)
      assert (int'(in_instr.rd) < int'(NREGS) && int'(in_instr.rs1) < int'(NREGS) &&
              int'(in_instr.rs2) < int'(NREGS))
        else $error("rebits_fpu: register specifier out of range");
  end

endmodule
