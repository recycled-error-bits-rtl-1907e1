// tb_rebits_fpu: end-to-end test of the REBits floating point add unit at its
// default parameters.
//
// An architectural model of the instruction set (registers, FPERR32, FPERR64,
// the mode bit) runs in program order as instructions are issued; every
// register write that appears on the write-back port is compared with the
// model, including its cycle (two cycles after the instruction is accepted),
// and the FPERR registers are compared at the end of each phase.
// Phases:
//   1. random instruction mix: scalar and packed fpadd at both precisions,
//      moves from and to FPERR, loads, with the mode bit toggling and dependent instructions
//      issued back to back so every forwarding path is used;
//   2. the summation kernel of the paper's Figure 7: the first three quarters
//      of the inputs are large and the last quarter small; the running error
//      is folded into the sum every FOLD iterations. The REBits result must
//      be closer to the exact sum than the naive float sum;
//   3. double-double addition written with FPERR64 (the paper's Figure 15),
//      compared with the classic software double-double addition (Figure 14)
//      evaluated in double precision; it must use 6 fpadd and 4 FPERR moves.
// Each mechanism (FPERR bypass from Execute and from Writeback, register
// forwarding, mode bit off, FPERR restore, round-up with negative error,
// far-aligned operand, both precisions) is counted and must occur.
module tb_rebits_fpu;
  import rebits_pkg::*;
  import fp_ref_pkg::*;

  localparam int N_RANDOM = 20000;
  localparam int N_SUM    = 4000;
  localparam int FOLD     = 100;
  localparam int N_DD     = 500;

  logic            clk = 1'b0, rst_n = 1'b0, rebits_en = 1'b1, in_valid = 1'b0;
  instr_t          in_instr = '0;
  logic            wb_valid;
  logic [4:0]      wb_rd;
  logic [FLEN-1:0] wb_data;
  logic [FLEN-1:0] fperr32, fperr64;

  rebits_fpu dut (.*);

  int checks = 0, failures = 0, cycles = 0;

  // Architectural model.
  logic [FLEN-1:0] m_reg [32];
  logic [FLEN-1:0] m_fperr32, m_fperr64;

  typedef struct {
    logic [4:0]  rd;
    logic [FLEN-1:0] data;
    int          cyc;
  } wb_exp_t;
  wb_exp_t expq[$];

  // The last two instructions issued (index 0 is the one just before): their
  // FPERR and register writes. Instructions issue on consecutive cycles, so
  // these are the ones in Execute and Writeback when the next one is decoded.
  typedef struct {
    logic  fperr_we;
    prec_e prec;
    logic  rd_we;
    int    rd;
  } hist_t;
  hist_t hist[2];

  // Mechanism counters.
  int n_byp_ex = 0, n_byp_wb = 0, n_fwd_ex = 0, n_fwd_wb = 0, n_mode_off = 0,
      n_restore = 0, n_round_up = 0, n_far = 0, n_add32 = 0, n_add64 = 0, n_mferr = 0, n_vec = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == 400_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Observe the write-back port.
  always @(negedge clk) begin
    if (rst_n) begin
      if (wb_valid) begin
        wb_exp_t x;
        checks++;
        if (expq.size() == 0) begin
          failures++;
          $display("FAIL: unexpected write-back r%0d %h", wb_rd, wb_data);
        end else begin
          x = expq.pop_front();
          if (wb_rd !== x.rd || wb_data !== x.data || cycles != x.cyc + 3) begin
            failures++;
            $display("FAIL: write-back r%0d %h at %0d, expected r%0d %h at %0d", wb_rd, wb_data,
                     cycles, x.rd, x.data, x.cyc + 3);
          end
        end
      end
    end
  end

  // Issue one instruction: update the model, queue the expected write-back,
  // and present the instruction for one cycle.
  // Keep lane 0 only for a scalar instruction.
  function automatic logic [FLEN-1:0] lanes(prec_e prec, logic vec, logic [FLEN-1:0] x);
    if (vec)                  return x;
    else if (prec == PREC_32) return {{(FLEN-32){1'b0}}, x[31:0]};
    else                      return {{(FLEN-64){1'b0}}, x[63:0]};
  endfunction

  // Issue one instruction: update the model, queue the expected write-back,
  // and present the instruction for one cycle.
  task automatic issue(op_e op, prec_e prec, int rd, int rs1 = 0, int rs2 = 0,
                       logic [FLEN-1:0] imm = '0, logic en = 1'b1, logic vec = 1'b0);
    instr_t i;
    logic [FLEN-1:0] res, e;
    logic            wr;
    i.op = op; i.prec = prec; i.vec = vec; i.rd = 5'(rd); i.rs1 = 5'(rs1); i.rs2 = 5'(rs2);
    i.imm = imm;
    wr  = 1'b0;
    res = '0;
    e   = '0;
    unique case (op)
      OP_FPADD: begin
        wr = 1'b1;
        if (prec == PREC_32) begin
          for (int l = 0; l < (vec ? int'(FLEN / 32) : 1); l++) begin
            logic [31:0] x, y, s32, e32;
            int d;
            x = m_reg[rs1][32*l +: 32];
            y = m_reg[rs2][32*l +: 32];
            add32_ref(x, y, s32, e32);
            res[32*l +: 32] = s32;
            e[32*l +: 32]   = e32;
            d = int'(x[30:23]) - int'(y[30:23]);
            if ((d > 25 || d < -25) && x[30:23] != 0 && y[30:23] != 0) n_far++;
            if (e32 != 0 && e32[31] != s32[31]) n_round_up++;
          end
          n_add32++;
          if (en) m_fperr32 = e; else n_mode_off++;
        end else begin
          for (int l = 0; l < (vec ? int'(FLEN / 64) : 1); l++) begin
            logic [63:0] s64, e64;
            add64_ref(m_reg[rs1][64*l +: 64], m_reg[rs2][64*l +: 64], s64, e64);
            res[64*l +: 64] = s64;
            e[64*l +: 64]   = e64;
            if (e64 != 0 && e64[63] != s64[63]) n_round_up++;
          end
          n_add64++;
          if (en) m_fperr64 = e; else n_mode_off++;
        end
        if (vec) n_vec++;
      end
      OP_MFERR: begin
        wr  = 1'b1;
        res = lanes(prec, vec, (prec == PREC_32) ? m_fperr32 : m_fperr64);
        n_mferr++;
      end
      OP_MTERR: begin
        if (prec == PREC_32) m_fperr32 = lanes(prec, vec, m_reg[rs1]);
        else                 m_fperr64 = lanes(prec, vec, m_reg[rs1]);
        n_restore++;
      end
      OP_LOAD: begin
        wr  = 1'b1;
        res = lanes(prec, vec, imm);
      end
      default: ;
    endcase
    // Which forwarding path this instruction needs.
    if (op == OP_MFERR) begin
      if (hist[0].fperr_we && hist[0].prec == prec)      n_byp_ex++;
      else if (hist[1].fperr_we && hist[1].prec == prec) n_byp_wb++;
    end
    if (op == OP_FPADD) begin
      if (hist[0].rd_we && (hist[0].rd == rs1 || hist[0].rd == rs2))      n_fwd_ex++;
      else if (hist[1].rd_we && (hist[1].rd == rs1 || hist[1].rd == rs2)) n_fwd_wb++;
    end
    hist[1] = hist[0];
    hist[0] = '{fperr_we: (op == OP_MTERR) || (op == OP_FPADD && en), prec: prec,
                rd_we: wr, rd: rd};
    if (wr) begin
      m_reg[rd] = res;
      expq.push_back('{rd: 5'(rd), data: res, cyc: cycles});
    end
    in_valid  = 1'b1;
    in_instr  = i;
    rebits_en = en;
    @(negedge clk);
    in_valid  = 1'b0;
    in_instr  = '0;
  endtask

  task automatic drain();
    repeat (4) @(negedge clk);
    hist[0] = '{1'b0, PREC_32, 1'b0, 0};
    hist[1] = '{1'b0, PREC_32, 1'b0, 0};
    checks++;
    if (expq.size() != 0 || fperr32 !== m_fperr32 || fperr64 !== m_fperr64) begin
      failures++;
      $display("FAIL: drain: %0d pending, fperr32 %h/%h fperr64 %h/%h", expq.size(),
               fperr32, m_fperr32, fperr64, m_fperr64);
    end
  endtask

  function automatic logic [31:0] rnd_f32(int emin, int emax, logic pos = 1'b0);
    return {pos ? 1'b0 : 1'($urandom), 8'(emin + int'($urandom % 32'(emax - emin + 1))),
            23'($urandom)};
  endfunction

  function automatic logic [63:0] rnd_f64(int emin, int emax);
    return {1'($urandom), 11'(emin + int'($urandom % 32'(emax - emin + 1))),
            20'($urandom), 32'($urandom)};
  endfunction

  // A register's worth of lanes, each a random normal value.
  function automatic logic [FLEN-1:0] rnd_vec(prec_e p, int lo32 = 110, int hi32 = 140,
                                              int lo64 = 1000, int hi64 = 1046);
    logic [FLEN-1:0] v;
    if (p == PREC_32) for (int l = 0; l < int'(FLEN / 32); l++) v[32*l +: 32] = rnd_f32(lo32, hi32);
    else              for (int l = 0; l < int'(FLEN / 64); l++) v[64*l +: 64] = rnd_f64(lo64, hi64);
    return v;
  endfunction

  // True if any lane has drifted out of the safe exponent range.
  function automatic logic drifted(prec_e p, logic [FLEN-1:0] v);
    logic bad = 1'b0;
    if (p == PREC_32) begin
      for (int l = 0; l < int'(FLEN / 32); l++)
        if (v[32*l+23 +: 8] > 8'd200 || (v[32*l+23 +: 8] < 8'd40 && v[32*l+23 +: 8] != 0))
          bad = 1'b1;
    end else begin
      for (int l = 0; l < int'(FLEN / 64); l++)
        if (v[64*l+52 +: 11] > 11'd1500 || (v[64*l+52 +: 11] < 11'd500 && v[64*l+52 +: 11] != 0))
          bad = 1'b1;
    end
    return bad;
  endfunction

  function automatic real abs_r(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic void need(int count, string what);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end else begin
      $display("  %-32s %0d", what, count);
    end
  endfunction

  // Registers 0-15 hold binary32 values, 16-31 binary64 values.
  function automatic int rreg(prec_e p);
    return (p == PREC_32) ? int'($urandom % 16) : 16 + int'($urandom % 16);
  endfunction

  initial begin
    foreach (m_reg[k]) m_reg[k] = '0;
    hist[0] = '{1'b0, PREC_32, 1'b0, 0};
    hist[1] = '{1'b0, PREC_32, 1'b0, 0};
    m_fperr32 = '0;
    m_fperr64 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---------------------------------------------------------------- 1
    for (int k = 0; k < 16; k++) issue(OP_LOAD, PREC_32, k, 0, 0, rnd_vec(PREC_32), 1, 1);
    for (int k = 16; k < 32; k++) issue(OP_LOAD, PREC_64, k, 0, 0, rnd_vec(PREC_64), 1, 1);
    for (int n = 0; n < N_RANDOM; n++) begin
      prec_e p;
      int    r, sel, x, y;
      logic  en, v;
      p   = prec_e'($urandom % 2);
      sel = int'($urandom % 100);
      en  = ($urandom % 8) != 0;
      v   = 1'($urandom);
      r   = rreg(p);
      x   = rreg(p);
      y   = rreg(p);
      if (sel < 20) begin
        issue(OP_LOAD, p, r, 0, 0, rnd_vec(p), 1, 1);
      end else if (sel < 60) begin
        // Far-aligned operands now and then: tiny values against big ones.
        if (sel < 25) issue(OP_LOAD, p, y, 0, 0, rnd_vec(p, 70, 90, 900, 940), 1, 1);
        issue(OP_FPADD, p, r, x, y, '0, en, v);
        if ($urandom % 2 == 1) issue(OP_MFERR, p, rreg(p), 0, 0, '0, 1, v);   // from Execute
      end else if (sel < 75) begin
        issue(OP_FPADD, p, r, x, y, '0, en, v);
        issue(OP_FPADD, p, rreg(p), r, x, '0, en, v);                        // reg forwarding
        issue(OP_MFERR, p, rreg(p), 0, 0, '0, 1, v);                         // from Execute
        issue(OP_MFERR, p, rreg(p), 0, 0, '0, 1, v);                         // from register
      end else if (sel < 85) begin
        issue(OP_MFERR, p, r, 0, 0, '0, 1, v);
      end else if (sel < 92) begin
        issue(OP_MTERR, p, 0, x, 0, '0, 1, v);
        if ($urandom % 2 == 1) begin
          issue(OP_NOP, p, 0);
          issue(OP_MFERR, p, r, 0, 0, '0, 1, v);                             // from Writeback
        end
      end else begin
        issue(OP_NOP, p, 0);
      end
      // Keep magnitudes in a safe range: reload anything that has drifted.
      for (int k = 0; k < 32; k++)
        if (drifted(k < 16 ? PREC_32 : PREC_64, m_reg[k]))
          issue(OP_LOAD, k < 16 ? PREC_32 : PREC_64, k, 0, 0,
                rnd_vec(k < 16 ? PREC_32 : PREC_64), 1, 1);
    end
    drain();

    // ---------------------------------------------------------------- 2
    // Figure 7 with r1 = sum, r2 = err, r3 = v[i], r4 = FPERR copy,
    // r5 = naive sum. The paper's fold test is (i % FoldErr == 0).
    begin
      real exact;
      real reb, nai;
      exact = 0.0;
      issue(OP_LOAD, PREC_32, 1, 0, 0, '0);
      issue(OP_LOAD, PREC_32, 2, 0, 0, '0);
      issue(OP_LOAD, PREC_32, 5, 0, 0, '0);
      for (int i = 0; i < N_SUM; i++) begin
        logic [31:0] v;
        v = (i < N_SUM * 3 / 4) ? rnd_f32(147, 148, 1'b1)   // ~2^20 .. 2^22
                                : rnd_f32(120, 125, 1'b1);  // ~2^-7 .. 2^-2
        exact += f32_to_real(v);
        issue(OP_LOAD, PREC_32, 3, 0, 0, FLEN'(v));
        issue(OP_FPADD, PREC_32, 1, 1, 3);                 // sum = sum + v[i]
        issue(OP_MFERR, PREC_32, 4);
        issue(OP_FPADD, PREC_32, 2, 2, 4);                 // err = err + FPERR
        if (i % FOLD == 0) begin
          issue(OP_FPADD, PREC_32, 1, 1, 2);               // sum = sum + err
          issue(OP_MFERR, PREC_32, 2);                     // err = FPERR
        end
        issue(OP_FPADD, PREC_32, 5, 5, 3);                 // naive
      end
      issue(OP_FPADD, PREC_32, 1, 1, 2);                   // result = sum + err
      drain();
      reb = f32_to_real(m_reg[1][31:0]);
      nai = f32_to_real(m_reg[5][31:0]);
      $display("  summation: exact %f  REBits-32 %f  naive-32 %f", exact, reb, nai);
      checks++;
      if (!(abs_r(reb - exact) < abs_r(nai - exact)) || abs_r(reb - exact) > 1e-6 * exact) begin
        failures++;
        $display("FAIL: REBits summation not more accurate than naive");
      end
    end

    // ---------------------------------------------------------------- 3
    // Figure 15: X = (r16 hi, r17 lo), Y = (r18 hi, r19 lo); s1 r20, s2 r21,
    // t1 r22, t2 r23.
    for (int n = 0; n < N_DD; n++) begin
      real xh, xl, yh, yl, s1, s2, t1, t2, bb;
      int  n_add_before, n_mov_before;
      xh = $bitstoreal(rnd_f64(1000, 1046));
      yh = $bitstoreal(rnd_f64(1000, 1046));
      // Canonical double-doubles: lo at most half an ulp of hi.
      xl = xh * 1.0e-17 * ($urandom % 1000) / 1000.0;
      yl = yh * 1.0e-17 * ($urandom % 1000) / 1000.0;
      if ($urandom % 2 == 1) xl = -xl;
      issue(OP_LOAD, PREC_64, 16, 0, 0, FLEN'($realtobits(xh)));
      issue(OP_LOAD, PREC_64, 17, 0, 0, FLEN'($realtobits(xl)));
      issue(OP_LOAD, PREC_64, 18, 0, 0, FLEN'($realtobits(yh)));
      issue(OP_LOAD, PREC_64, 19, 0, 0, FLEN'($realtobits(yl)));
      n_add_before = n_add64;
      n_mov_before = n_mferr;
      issue(OP_FPADD, PREC_64, 20, 16, 18);   // s1 = X.hi + Y.hi
      issue(OP_MFERR, PREC_64, 21);           // s2 = FPERR64
      issue(OP_FPADD, PREC_64, 22, 17, 19);   // t1 = X.lo + Y.lo
      issue(OP_MFERR, PREC_64, 23);           // t2 = FPERR64
      issue(OP_FPADD, PREC_64, 21, 21, 22);   // s2 += t1
      issue(OP_FPADD, PREC_64, 20, 20, 21);   // s1 = s1 + s2
      issue(OP_MFERR, PREC_64, 21);           // s2 = FPERR64
      issue(OP_FPADD, PREC_64, 21, 21, 23);   // s2 += t2
      issue(OP_FPADD, PREC_64, 20, 20, 21);   // s1 = s1 + s2
      issue(OP_MFERR, PREC_64, 21);           // s2 = FPERR64
      checks++;
      if (n_add64 - n_add_before != 6 || n_mferr - n_mov_before != 4) begin
        failures++;
        $display("FAIL: double-double add used %0d fpadd and %0d moves",
                 n_add64 - n_add_before, n_mferr - n_mov_before);
      end
      // Figure 14, in double arithmetic.
      s1 = xh + yh; bb = s1 - xh; s2 = (xh - (s1 - bb)) + (yh - bb);
      t1 = xl + yl; bb = t1 - xl; t2 = (xl - (t1 - bb)) + (yl - bb);
      s2 += t1;
      bb = s1 + s2; s2 = s2 - (bb - s1); s1 = bb;
      s2 += t2;
      bb = s1 + s2; s2 = s2 - (bb - s1); s1 = bb;
      checks++;
      if (m_reg[20] !== FLEN'($realtobits(s1)) || (m_reg[21] !== FLEN'($realtobits(s2)) &&
          !(s2 == 0.0 && m_reg[21] == '0))) begin
        failures++;
        $display("FAIL: double-double %h %h, software %h %h", m_reg[20], m_reg[21],
                 $realtobits(s1), $realtobits(s2));
      end
    end
    drain();

    $display("mechanisms:");
    need(n_byp_ex,   "FPERR bypass from Execute");
    need(n_byp_wb,   "FPERR bypass from Writeback");
    need(n_fwd_ex,   "register forward from Execute");
    need(n_fwd_wb,   "register forward from Writeback");
    need(n_mode_off, "fpadd with REBits mode off");
    need(n_restore,  "FPERR restore (move to FPERR)");
    need(n_round_up, "round up, error of opposite sign");
    need(n_far,      "far-aligned operand (error = B)");
    need(n_add32,    "32-bit fpadd");
    need(n_add64,    "64-bit fpadd");
    need(n_vec,      "packed fpadd");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
