// rebits_fpadd: floating point adder that also returns its own rounding error.
//
// For every addition it produces the IEEE-754 sum, rounded to nearest-even,
// and the error of that sum, err = (a + b) - sum, which is the part of the
// exact result the rounding threw away. For round-to-nearest addition that
// error is itself exactly representable in the same format, so it is returned
// as a second IEEE-754 number of the same width (the value the architecture
// writes to FPERR).
//
// How it works, following the flow of the REBits error computation:
//   1. The operand of larger magnitude is A, the other B; exponent difference
//      d = exp(A) - exp(B).
//   2. Both significands (with hidden 1) are extended with P+1 zero bits on
//      the right and B is shifted right by d to align it with A. Because the
//      extension is as wide as the largest shift that reaches this path, no
//      bit of B is lost: the bits that a plain adder would discard during
//      alignment (B' in the paper's flow chart) stay in the low part of the
//      aligned word.
//   3. The aligned words are added (or subtracted for unlike signs); the
//      result is exact.
//   4. The exact sum is normalised and rounded to P bits. The bits below the
//      kept P bits are the rounding remainder; together they hold both the
//      bits lost while rounding (R') and the alignment bits (B').
//   5. If the sum was rounded down in magnitude, the error magnitude is the
//      remainder and the error has the sign of the sum (5a); if it was rounded
//      up, the magnitude is the two's complement of the remainder and the
//      error has the opposite sign (5b).
//   6/7. The error magnitude is normalised with a leading-one detector; its
//      exponent is the sum's exponent minus the distance of its leading one
//      from the top of the aligned word.
// When d >= P+2, B lies wholly below half an ulp of A, so the sum is A and
// the error is B itself; that case takes a bypass and needs no wide shifter.
//
// Interface: purely combinational, a and b in, sum and err out, all 1+EXP_W+
// MAN_W bits wide. The defaults give the paper's REBits-32 adder (binary32);
// EXP_W=11, MAN_W=52 gives REBits-64, EXP_W=5, MAN_W=10 a 16-bit adder.
//
// Special cases: subnormal inputs are read as zero and results below the
// normal range are flushed to zero (the paper does not handle subnormals). A
// NaN or infinite sum gives err = +0, as does an overflow to infinity; an
// error that would be subnormal is flushed to +0. Only round-to-nearest-even
// is built: with it the error is always exact. All of these are this design's
// choices where the paper is silent.
module rebits_fpadd #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 23
) (
  input  logic [EXP_W+MAN_W:0] a,
  input  logic [EXP_W+MAN_W:0] b,
  output logic [EXP_W+MAN_W:0] sum,
  output logic [EXP_W+MAN_W:0] err
);

  localparam int unsigned FW   = 1 + EXP_W + MAN_W;
  localparam int unsigned P    = MAN_W + 1;        // significand bits
  localparam int unsigned SW   = 2 * P + 2;        // aligned word: carry, P, P+1
  localparam int unsigned RW   = SW - P;           // rounding remainder width
  localparam int unsigned LW   = $clog2(SW);       // leading-one index width
  localparam int          EMAX = (1 << EXP_W) - 1;

  logic             sa, sb, sl, ss;
  logic [EXP_W-1:0] ea, eb, el, es;
  logic [MAN_W-1:0] fa, fb, fl, fs;
  logic             a_nan, b_nan, a_inf, b_inf, a_zero, b_zero, swap;
  logic [EXP_W-1:0] d;
  logic             eff_sub, far;
  logic [SW-1:0]    a_fx, b_fx, s_fx, s_norm;
  logic [LW-1:0]    lead;
  logic [P-1:0]     sig;
  logic [RW-1:0]    rem;
  logic             rup;
  logic [P:0]       sig_r;
  logic [RW:0]      emag, emag_norm;
  logic [LW-1:0]    elead;
  int               e_pre, e_sum, e_err;
  logic [FW-1:0]    qnan;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    a_nan  = (int'(ea) == EMAX) && (fa != '0);
    b_nan  = (int'(eb) == EMAX) && (fb != '0);
    a_inf  = (int'(ea) == EMAX) && (fa == '0);
    b_inf  = (int'(eb) == EMAX) && (fb == '0);
    a_zero = (ea == '0);
    b_zero = (eb == '0);
    qnan   = {1'b0, {EXP_W{1'b1}}, 1'b1, {(MAN_W-1){1'b0}}};

    // Step 1: order by magnitude.
    swap = {eb, fb} > {ea, fa};
    {sl, el, fl} = swap ? b : a;
    {ss, es, fs} = swap ? a : b;
    d       = el - es;
    eff_sub = sl ^ ss;
    far     = int'(d) >= int'(P + 2);

    // Steps 2-3: align without losing bits and add exactly.
    a_fx = {1'b0, 1'b1, fl, {(P+1){1'b0}}};
    b_fx = {1'b0, 1'b1, fs, {(P+1){1'b0}}} >> d;
    s_fx = eff_sub ? a_fx - b_fx : a_fx + b_fx;

    // Step 4: normalise and round to nearest-even.
    lead = '0;
    for (int i = 0; i < int'(SW); i++)
      if (s_fx[i]) lead = LW'(i);
    s_norm = s_fx << (LW'(SW - 1) - lead);
    sig    = s_norm[SW-1 -: P];
    rem    = s_norm[RW-1:0];
    rup    = rem[RW-1] & ((|rem[RW-2:0]) | sig[0]);
    sig_r  = {1'b0, sig} + (P+1)'(rup);
    e_pre  = int'(el) + int'(lead) - int'(2 * P);
    e_sum  = sig_r[P] ? e_pre + 1 : e_pre;

    // Step 5: error magnitude and sign.
    emag = rup ? ((RW+1)'(1) << RW) - {1'b0, rem} : {1'b0, rem};

    // Steps 6-7: normalise the error.
    elead = '0;
    for (int i = 0; i <= int'(RW); i++)
      if (emag[i]) elead = LW'(i);
    emag_norm = emag << (LW'(RW) - elead);
    e_err     = e_pre - (int'(SW) - 1 - int'(elead));

    // Assemble, special cases first.
    sum = '0;
    err = '0;
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      sum = qnan;
    end else if (a_inf) begin
      sum = a;
    end else if (b_inf) begin
      sum = b;
    end else if (a_zero && b_zero) begin
      sum = {sa & sb, {(FW-1){1'b0}}};
    end else if (a_zero) begin
      sum = b;
    end else if (b_zero) begin
      sum = a;
    end else if (far) begin
      sum = {sl, el, fl};
      err = {ss, es, fs};
    end else if (s_fx == '0) begin
      sum = '0;                              // exact cancellation gives +0
    end else if (e_sum >= EMAX) begin
      sum = {sl, {EXP_W{1'b1}}, {MAN_W{1'b0}}};  // overflow to infinity
    end else if (e_sum <= 0) begin
      sum = {sl, {(FW-1){1'b0}}};            // underflow: flush to zero
    end else begin
      sum = {sl, EXP_W'(e_sum), sig_r[P] ? {MAN_W{1'b0}} : sig_r[MAN_W-1:0]};
      if (emag != '0 && e_err > 0)
        err = {rup ? ~sl : sl, EXP_W'(e_err), emag_norm[RW-1 -: MAN_W]};
    end
  end

  // The error of a round-to-nearest addition fits in P bits: nothing may be
  // left below the kept error significand.
  always_comb begin
    if (!far && s_fx != '0 && emag != '0)
      assert (emag_norm[RW-MAN_W-1:0] == '0)
        else $error("rebits_fpadd: error does not fit in %0d bits", P);
  end

endmodule
