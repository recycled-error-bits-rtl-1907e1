// tb_rebits_fpadd: self-checking test of the error-returning adder.
//
// Three instances are checked against models that do not share the adder's
// method:
//   * binary32: the exact sum is formed in double precision (exact while the
//     exponent difference is at most 28), rounded to binary32 by a software
//     round-to-nearest-even, and the error is the exact double difference.
//     For larger differences the smaller operand is below half an ulp, so the
//     sum is the larger operand and the error is the smaller one.
//   * binary64: the sum is the simulator's own double addition and the error
//     comes from Knuth's TwoSum, which is exact in round-to-nearest.
//   * a 16-bit format: the worked example of the paper's Figure 4
//     (1.1101001101x2^14 + 1.1000111011x2^10 -> 1.1110110001x2^14, exact
//     error -5) and the text's binary32 example 2808064.0 + 100.125.
// Special values (zeros, NaN, infinity, overflow, subnormal inputs) are
// checked by hand-worked expectations, and random operands near both ends of
// the exponent range against the models of fp_ref_pkg (flush to zero below
// the normal range, infinity and error +0 on overflow).
module tb_rebits_fpadd;

  logic [31:0] a32, b32, s32, e32;
  logic [63:0] a64, b64, s64, e64;
  logic [15:0] a16, b16, s16, e16;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  int cycles = 0;

  rebits_fpadd #(.EXP_W(8),  .MAN_W(23)) u32 (.a(a32), .b(b32), .sum(s32), .err(e32));
  rebits_fpadd #(.EXP_W(11), .MAN_W(52)) u64 (.a(a64), .b(b64), .sum(s64), .err(e64));
  rebits_fpadd #(.EXP_W(5),  .MAN_W(10)) u16 (.a(a16), .b(b16), .sum(s16), .err(e16));

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == 2_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real f32_to_real(logic [31:0] x);
    if (x[30:23] == 8'd0) return x[31] ? -0.0 : 0.0;
    return $bitstoreal({x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0});
  endfunction

  // Round a double (in the binary32 normal range) to binary32, nearest-even.
  function automatic logic [31:0] real_to_f32(real r);
    logic [63:0] bits;
    logic [52:0] m;
    logic [24:0] keep;
    logic        up;
    int          e;
    bits = $realtobits(r);
    if (bits[62:0] == '0) return {bits[63], 31'd0};
    e    = int'(bits[62:52]) - 1023 + 127;
    m    = {1'b1, bits[51:0]};
    up   = m[28] & ((|m[27:0]) | m[29]);
    keep = {1'b0, m[52:29]} + 25'(up);
    if (keep[24]) begin
      e++;
      keep = keep >> 1;
    end
    return {bits[63], 8'(e), keep[22:0]};
  endfunction

  function automatic logic [63:0] zero_to_pos(logic [63:0] x);
    return (x[62:0] == '0) ? 64'd0 : x;
  endfunction

  task automatic check32(logic [31:0] a, logic [31:0] b, logic [31:0] es, logic [31:0] ee,
                         string what);
    a32 = a; b32 = b;
    #1;
    checks++;
    if (s32 !== es || e32 !== ee) begin
      failures++;
      $display("FAIL %s: %h + %h -> sum %h err %h, expected %h %h", what, a, b, s32, e32, es, ee);
    end
  endtask

  task automatic check64(logic [63:0] a, logic [63:0] b, logic [63:0] es, logic [63:0] ee,
                         string what);
    a64 = a; b64 = b;
    #1;
    checks++;
    if (s64 !== es || e64 !== ee) begin
      failures++;
      $display("FAIL %s: %h + %h -> sum %h err %h, expected %h %h", what, a, b, s64, e64, es, ee);
    end
  endtask

  function automatic logic [31:0] rand_f32(int emin, int emax);
    return {1'($urandom), 8'(emin + int'($urandom % 32'(emax - emin + 1))), 23'($urandom)};
  endfunction

  initial begin
    logic [31:0] a, b, rs, re;
    logic [63:0] x, y, rs64, re64;
    real ra, rb, ex, s, bb, t;
    int  d;

    // Paper, Section 2.1: 2808064.0 + 100.125 = 2808164.0, error 0.125.
    // 2808064.0 = 4a2b6400, 100.125 = 42c84000, 2808164.0 = 4a2b6590, 0.125 = 3e000000.
    check32(32'h4a2b6400, 32'h42c84000, 32'h4a2b6590, 32'h3e000000, "paper example");

    // Paper, Figure 4 (16-bit): A = 1.1101001101x2^14, B = 1.1000111011x2^10.
    a16 = {1'b0, 5'd29, 10'b1101001101};
    b16 = {1'b0, 5'd25, 10'b1000111011};
    #1;
    checks++;
    // 29904 + 1595 = 31499; rounded 1.1110110001x2^14 = 31504; error -5 = -1.01x2^2.
    if (s16 !== {1'b0, 5'd29, 10'b1110110001} || e16 !== {1'b1, 5'd17, 10'b0100000000}) begin
      failures++;
      $display("FAIL figure 4: sum %b err %b", s16, e16);
    end

    // Special values.
    check32(32'h3f800000, 32'hbf800000, 32'h00000000, 32'h0, "x + -x");
    check32(32'h80000000, 32'h80000000, 32'h80000000, 32'h0, "-0 + -0");
    check32(32'h00000000, 32'h40490fdb, 32'h40490fdb, 32'h0, "0 + x");
    check32(32'h00012345, 32'h40490fdb, 32'h40490fdb, 32'h0, "subnormal + x");
    check32(32'h7f800000, 32'h3f800000, 32'h7f800000, 32'h0, "inf + 1");
    check32(32'h7f800000, 32'hff800000, 32'h7fc00000, 32'h0, "inf - inf");
    check32(32'h7fc12345, 32'h3f800000, 32'h7fc00000, 32'h0, "nan + 1");
    check32(32'h7f7fffff, 32'h7f7fffff, 32'h7f800000, 32'h0, "overflow");
    // 1 + 2^-24: exactly half an ulp, ties to even: sum 1, error 2^-24.
    check32(32'h3f800000, 32'h33800000, 32'h3f800000, 32'h33800000, "tie to even");
    // 1 + 3*2^-25 (= 1.5 half-ulps): rounds up, error -2^-25.
    check32(32'h3f800000, 32'h33c00000, 32'h3f800001, 32'hb3000000, "round up");
    // 1 - 2^-30: far below half an ulp of the lower binade: sum 1, error -2^-30.
    check32(32'h3f800000, 32'hb0800000, 32'h3f800000, 32'hb0800000, "far subtract");

    // Random binary32 against the double-precision model.
    for (int n = 0; n < 20000; n++) begin
      a = rand_f32(60, 190);
      d = int'($urandom % 40);
      if (n % 4 == 0) d = int'($urandom % 3);           // heavy cancellation region
      b = {1'($urandom), 8'(int'(a[30:23]) - d), 23'($urandom)};
      if ($urandom % 2 == 1) {a, b} = {b, a};
      ra = f32_to_real(a);
      rb = f32_to_real(b);
      if (d <= 28) begin
        ex = ra + rb;                                    // exact in double
        rs = real_to_f32(ex);
        re = (ex == f32_to_real(rs)) ? 32'd0 : real_to_f32(ex - f32_to_real(rs));
        if (ex == 0.0) rs = 32'd0;
      end else begin
        rs = (a[30:0] > b[30:0]) ? a : b;
        re = (a[30:0] > b[30:0]) ? b : a;
      end
      check32(a, b, rs, re, "random32");
    end

    // Random binary64 against TwoSum.
    for (int n = 0; n < 20000; n++) begin
      x = {1'($urandom), 11'(300 + $urandom % 1400), 20'($urandom), 32'($urandom)};
      d = int'($urandom % 70);
      if (n % 4 == 0) d = int'($urandom % 3);
      y = {1'($urandom), 11'(int'(x[62:52]) - d), 20'($urandom), 32'($urandom)};
      ra = $bitstoreal(x);
      rb = $bitstoreal(y);
      s  = ra + rb;
      bb = s - ra;
      t  = (ra - (s - bb)) + (rb - bb);
      rs64 = zero_to_pos($realtobits(s));
      re64 = zero_to_pos($realtobits(t));
      check64(x, y, rs64, re64, "random64");
    end

    // Near the ends of the exponent range: flushing of sums and errors below
    // the normal range, rounding up into the smallest normal, and overflow.
    for (int n = 0; n < 20000; n++) begin
      logic [7:0]  ea8;
      logic [10:0] ea11;
      int          lo;
      lo   = (n % 2 == 0);
      ea8  = lo ? 8'(1 + $urandom % 30) : 8'(224 + $urandom % 31);
      ea11 = lo ? 11'(1 + $urandom % 60) : 11'(1986 + $urandom % 61);
      d    = int'($urandom % 30);
      a    = {1'($urandom), ea8, 23'($urandom)};
      b    = {1'($urandom), (int'(ea8) > d) ? 8'(int'(ea8) - d) : 8'd1, 23'($urandom)};
      fp_ref_pkg::add32_ref(a, b, rs, re);
      check32(a, b, rs, re, "edge32");
      d    = int'($urandom % 60);
      x    = {1'($urandom), ea11, 20'($urandom), 32'($urandom)};
      y    = {1'($urandom), (int'(ea11) > d) ? 11'(int'(ea11) - d) : 11'd1, 20'($urandom),
              32'($urandom)};
      fp_ref_pkg::add64_ref(x, y, rs64, re64);
      check64(x, y, rs64, re64, "edge64");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
