// tb_workload_sum: the summation kernels of the paper's evaluation, run on the
// whole REBits unit at its default parameters.
//
// N values are summed (N = 100,000, the paper's "cached data" size), the
// first three quarters large (2^29..2^30) and the last quarter small
// (2^10..2^20), as in the positive-number summation kernel. In one instruction
// stream the unit computes:
//   Native-32                plain float sum
//   Native-64                plain double sum (64-bit fpadd)
//   REBits-32-no-fold        Figure 7, error folded in once after the loop
//   REBits-32-fold1000/100/1 Figure 7, folded every 1000 / 100 / 1 iterations
//   2-norm, naive and REBits (Figure 6): the squares are formed here in the
//     testbench (rounded to float), since the unit only adds; a sum of
//     computed products is a sum of given numbers.
// Checks:
//   * every final register value equals an instruction-level model built on
//     fp_ref_pkg (bit exact);
//   * the REBits results are closer to the exact sum than Native-32;
//   * REBits-32 folded every 1000 (or more often) iterations is within one
//     float ulp of the exact sum, as the paper reports for fold1000;
//   * the REBits 2-norm is closer to the exact 2-norm than the naive one.
// The exact reference sum is accumulated in the testbench with a compensated
// (TwoSum) double-double accumulator.
module tb_workload_sum;
  import rebits_pkg::*;
  import fp_ref_pkg::*;

  localparam int N = 100_000;

  logic            clk = 1'b0, rst_n = 1'b0, rebits_en = 1'b1, in_valid = 1'b0;
  instr_t          in_instr = '0;
  logic            wb_valid;
  logic [4:0]      wb_rd;
  logic [FLEN-1:0] wb_data;
  logic [FLEN-1:0] fperr32, fperr64;

  rebits_fpu dut (.*);

  int checks = 0, failures = 0, cycles = 0;
  logic [63:0] m_reg [32];       // model, lane 0 only (scalar stream)
  logic [31:0] m_fperr32;
  logic [63:0] m_fperr64;
  logic [63:0] shadow [32];      // what the unit wrote back

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == 4_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk)
    if (rst_n && wb_valid) shadow[wb_rd] = wb_data[63:0];

  task automatic issue(op_e op, prec_e prec, int rd, int rs1 = 0, int rs2 = 0,
                       logic [63:0] imm = '0);
    logic [31:0] s32, e32;
    logic [63:0] s64, e64;
    unique case (op)
      OP_FPADD:
        if (prec == PREC_32) begin
          add32_ref(m_reg[rs1][31:0], m_reg[rs2][31:0], s32, e32);
          m_reg[rd] = {32'd0, s32};
          m_fperr32 = e32;
        end else begin
          add64_ref(m_reg[rs1], m_reg[rs2], s64, e64);
          m_reg[rd] = s64;
          m_fperr64 = e64;
        end
      OP_MFERR: m_reg[rd] = (prec == PREC_32) ? {32'd0, m_fperr32} : m_fperr64;
      OP_LOAD:  m_reg[rd] = (prec == PREC_32) ? {32'd0, imm[31:0]} : imm;
      default: ;
    endcase
    in_valid = 1'b1;
    in_instr = '{op: op, prec: prec, vec: 1'b0, rd: 5'(rd), rs1: 5'(rs1), rs2: 5'(rs2),
                 imm: FLEN'(imm)};
    @(negedge clk);
    in_valid = 1'b0;
    in_instr = '0;
  endtask

  // Compensated double-double accumulation for the exact reference.
  real acc_hi = 0.0, acc_lo = 0.0;
  task automatic acc_add(real x);
    real s, bb, e;
    s  = acc_hi + x;
    bb = s - acc_hi;
    e  = (acc_hi - (s - bb)) + (x - bb);
    acc_hi = s;
    acc_lo += e;
  endtask

  function automatic real abs_r(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // Registers: f3 v (float), f4 FPERR copy, f5 Native-32,
  // (f6,f7) no-fold, (f8,f9) fold1000, (f10,f11) fold100, (f12,f13) fold1,
  // f14 v*v, f15 naive 2-norm sum, (f0,f1) REBits 2-norm sum and error,
  // f16 v (double), f17 Native-64.
  task automatic rebits_step(int s, int e, int fold, int i, int v);
    issue(OP_FPADD, PREC_32, s, s, v);          // sum = sum + v[i]
    issue(OP_MFERR, PREC_32, 4);
    issue(OP_FPADD, PREC_32, e, e, 4);          // err = err + FPERR
    if (fold != 0 && i % fold == 0) begin
      issue(OP_FPADD, PREC_32, s, s, e);        // sum = sum + err
      issue(OP_MFERR, PREC_32, e);              // err = FPERR
    end
  endtask

  initial begin
    real exact, sq_exact_hi, sq_exact_lo, r[7];
    real n2_exact, n2_naive, n2_reb;
    string names[7];
    names = '{"Native-32", "Native-64", "REBits-32-no-fold", "REBits-32-fold1000",
              "REBits-32-fold100", "REBits-32-fold1", "2-norm"};
    foreach (m_reg[k]) m_reg[k] = '0;
    foreach (shadow[k]) shadow[k] = '0;
    m_fperr32 = '0;
    m_fperr64 = '0;
    sq_exact_hi = 0.0;
    sq_exact_lo = 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int i = 0; i < N; i++) begin
      logic [31:0] v, sq;
      real vr, sqr;
      v  = (i < N * 3 / 4) ? {1'b0, 8'(127 + 29), 23'($urandom)}
                           : {1'b0, 8'(127 + 10 + $urandom % 10), 23'($urandom)};
      vr = f32_to_real(v);
      acc_add(vr);
      sq = real_to_f32(vr * vr);                 // float product, as the core's multiplier
      sqr = f32_to_real(sq);
      begin
        real s, bb, e;
        s  = sq_exact_hi + sqr;
        bb = s - sq_exact_hi;
        e  = (sq_exact_hi - (s - bb)) + (sqr - bb);
        sq_exact_hi = s;
        sq_exact_lo += e;
      end
      issue(OP_LOAD, PREC_32, 3, 0, 0, {32'd0, v});
      issue(OP_LOAD, PREC_64, 16, 0, 0, $realtobits(vr));
      issue(OP_LOAD, PREC_32, 14, 0, 0, {32'd0, sq});
      issue(OP_FPADD, PREC_32, 5, 5, 3);         // Native-32
      issue(OP_FPADD, PREC_64, 17, 17, 16);      // Native-64
      rebits_step(6, 7, 0, i, 3);                // no fold
      rebits_step(8, 9, 1000, i, 3);
      rebits_step(10, 11, 100, i, 3);
      rebits_step(12, 13, 1, i, 3);
      issue(OP_FPADD, PREC_32, 15, 15, 14);      // naive 2-norm
      rebits_step(0, 1, 0, i, 14);               // REBits 2-norm (Figure 6)
    end
    issue(OP_FPADD, PREC_32, 6, 6, 7);           // result = sum + err
    issue(OP_FPADD, PREC_32, 8, 8, 9);
    issue(OP_FPADD, PREC_32, 10, 10, 11);
    issue(OP_FPADD, PREC_32, 12, 12, 13);
    issue(OP_FPADD, PREC_32, 0, 0, 1);
    repeat (4) @(negedge clk);

    // Bit-exact against the model.
    for (int k = 0; k < 18; k++) begin
      checks++;
      if (shadow[k] !== m_reg[k]) begin
        failures++;
        $display("FAIL: f%0d = %h, model %h", k, shadow[k], m_reg[k]);
      end
    end

    exact = acc_hi + acc_lo;
    r[0] = f32_to_real(shadow[5][31:0]);
    r[1] = $bitstoreal(shadow[17]);
    r[2] = f32_to_real(shadow[6][31:0]);
    r[3] = f32_to_real(shadow[8][31:0]);
    r[4] = f32_to_real(shadow[10][31:0]);
    r[5] = f32_to_real(shadow[12][31:0]);
    $display("N = %0d, exact sum %e", N, exact);
    for (int k = 0; k < 6; k++)
      $display("  %-20s %e  relative error %e", names[k], r[k], abs_r(r[k] - exact) / exact);

    // REBits beats Native-32.
    for (int k = 2; k < 6; k++) begin
      checks++;
      if (!(abs_r(r[k] - exact) < abs_r(r[0] - exact))) begin
        failures++;
        $display("FAIL: %s not more accurate than Native-32", names[k]);
      end
    end
    // Folding at least every 1000 iterations: within one float ulp.
    for (int k = 3; k < 6; k++) begin
      real ulp;
      ulp = $pow(2.0, $floor($ln(exact) / $ln(2.0)) - 23.0);
      checks++;
      if (abs_r(r[k] - exact) > ulp) begin
        failures++;
        $display("FAIL: %s off by more than one ulp (%e)", names[k], ulp);
      end
    end

    n2_exact = $sqrt(sq_exact_hi + sq_exact_lo);
    n2_naive = $sqrt(f32_to_real(shadow[15][31:0]));
    n2_reb   = $sqrt(f32_to_real(shadow[0][31:0]));
    $display("  2-norm exact %e  naive-32 %e (rel %e)  REBits-32 %e (rel %e)", n2_exact,
             n2_naive, abs_r(n2_naive - n2_exact) / n2_exact, n2_reb,
             abs_r(n2_reb - n2_exact) / n2_exact);
    checks++;
    if (!(abs_r(n2_reb - n2_exact) < abs_r(n2_naive - n2_exact))) begin
      failures++;
      $display("FAIL: REBits 2-norm not more accurate than naive");
    end
    $display("cycles: %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
