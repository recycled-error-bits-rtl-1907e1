// fp_ref_pkg: reference models used by the testbenches. They compute the sum
// and rounding error of a floating point addition without the adder's method:
//   add64_ref uses the simulator's double addition and Knuth's TwoSum, which
//     gives the exact error under round-to-nearest;
//   add32_ref forms the exact sum in double (exact while the exponent
//     difference is at most 28), rounds it to binary32 in software and takes
//     the exact double difference as the error. For larger exponent
//     differences the smaller operand is below half an ulp of the larger,
//     so the sum is the larger operand and the error the smaller one.
// Both apply the unit's conventions: results and errors below the normal
// range are flushed to zero (error +0), an exactly cancelling sum is +0, and a
// sum that overflows to infinity has error +0.
// Inputs must be finite and normal or zero.
package fp_ref_pkg;

  function automatic real f32_to_real(logic [31:0] x);
    if (x[30:23] == 8'd0) return 0.0;
    return $bitstoreal({x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0});
  endfunction

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
    if (e <= 0)   return {bits[63], 31'd0};
    if (e >= 255) return {bits[63], 8'hff, 23'd0};
    return {bits[63], 8'(e), keep[22:0]};
  endfunction

  function automatic void add32_ref(input logic [31:0] a, input logic [31:0] b,
                                    output logic [31:0] s, output logic [31:0] e);
    real ex, rs;
    int  d;
    d = int'(a[30:23]) - int'(b[30:23]);
    if (d < 0) d = -d;
    if (a[30:23] == 0 || b[30:23] == 0 || d <= 28) begin
      ex = f32_to_real(a) + f32_to_real(b);
      s  = real_to_f32(ex);
      if (a[30:23] == 0 && b[30:23] == 0) s = {a[31] & b[31], 31'd0};
      else if (a[30:23] == 0)             s = b;
      else if (b[30:23] == 0)             s = a;
      else if (ex == 0.0)                 s = 32'd0;
      rs = f32_to_real(s);
      e  = (s[30:23] == 0 || s[30:23] == 8'hff || ex == rs) ? 32'd0 : real_to_f32(ex - rs);
      if (e[30:23] == 0) e = 32'd0;
    end else begin
      s = (a[30:0] > b[30:0]) ? a : b;
      e = (a[30:0] > b[30:0]) ? b : a;
    end
  endfunction

  function automatic logic [63:0] flush64(logic [63:0] x, logic keep_sign);
    if (x[62:52] == 11'd0) return keep_sign ? {x[63], 63'd0} : 64'd0;
    return x;
  endfunction

  function automatic void add64_ref(input logic [63:0] a, input logic [63:0] b,
                                    output logic [63:0] s, output logic [63:0] e);
    real ra, rb, rs, bb, t;
    ra = (a[62:52] == 0) ? 0.0 : $bitstoreal(a);
    rb = (b[62:52] == 0) ? 0.0 : $bitstoreal(b);
    rs = ra + rb;
    bb = rs - ra;
    t  = (ra - (rs - bb)) + (rb - bb);
    s  = $realtobits(rs);
    if (a[62:52] == 0 && b[62:52] == 0) s = {a[63] & b[63], 63'd0};
    else if (a[62:52] == 0)             s = b;
    else if (b[62:52] == 0)             s = a;
    else if (rs == 0.0)                 s = 64'd0;
    s = flush64(s, 1'b1);
    e = (s[62:52] == 0 || s[62:52] == 11'h7ff) ? 64'd0 : flush64($realtobits(t), 1'b0);
    if (e[62:0] == 0) e = 64'd0;
  endfunction

endpackage
