// rebits_simd_add: packed REBits addition over one FLEN-bit register.
//
// For packed arithmetic the paper extends packing to FPERR: a 128-bit
// register holds four floats or two doubles, and FPERR then holds the four
// (or two) errors in the same lanes. This block adds two registers lane by
// lane with FLEN/32 binary32 and FLEN/64 binary64 error-returning adders
// (rebits_fpadd) and, selected by `prec`, returns the packed sums and the
// packed errors. A scalar operation uses this block too and keeps lane 0.
//
// Interface: purely combinational; a, b, sum and err are FLEN bits, lane i of
// a 32-bit operation at bits [32*i +: 32], of a 64-bit one at [64*i +: 64].
// Having separate 32- and 64-bit adders, rather than one adder that splits,
// is this design's choice.
module rebits_simd_add
  import rebits_pkg::*;
(
  input  prec_e           prec,
  input  logic [FLEN-1:0] a,
  input  logic [FLEN-1:0] b,
  output logic [FLEN-1:0] sum,
  output logic [FLEN-1:0] err
);

  localparam int unsigned L32 = FLEN / 32;
  localparam int unsigned L64 = FLEN / 64;

  logic [FLEN-1:0] sum32, err32, sum64, err64;

  for (genvar i = 0; i < L32; i++) begin : g_lane32
    rebits_fpadd #(.EXP_W(F32_EXP_W), .MAN_W(F32_MAN_W)) u_add (
      .a  (a[32*i +: 32]),
      .b  (b[32*i +: 32]),
      .sum(sum32[32*i +: 32]),
      .err(err32[32*i +: 32])
    );
  end

  for (genvar i = 0; i < L64; i++) begin : g_lane64
    rebits_fpadd #(.EXP_W(F64_EXP_W), .MAN_W(F64_MAN_W)) u_add (
      .a  (a[64*i +: 64]),
      .b  (b[64*i +: 64]),
      .sum(sum64[64*i +: 64]),
      .err(err64[64*i +: 64])
    );
  end

  always_comb begin
    sum = (prec == PREC_32) ? sum32 : sum64;
    err = (prec == PREC_32) ? err32 : err64;
  end

endmodule
