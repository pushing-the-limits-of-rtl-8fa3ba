// seu: Shared Exponent Unit, first half of the SE stage.
//
// Turns the FP16 input vector and its maximum into one DBFP block: every
// lane keeps its sign and an integer private mantissa aligned to a single
// shared exponent, the largest element exponent emax of the vector. The
// mantissa (hidden one + 10 fraction bits) is shifted right by
// emax - e_i with round-to-nearest (ties away from zero on the magnitude),
// so x_i ~= p_i * 2^(emax - 25) for every lane and for the maximum, and the
// later subtraction is a plain integer subtraction.
//
// From the paper: the SE stage "segments and aligns the exponent of the
// input vector with the MAX stage's maximum value", producing the "DBFP
// Vector" and "DBFP MAX" of Fig. 4(a), and the rounding-to-nearest scheme.
// Aligning to the largest exponent rather than to the exponent of the
// maximum value is this design's choice: it keeps very negative elements
// from overflowing. Subnormal inputs are handled with exponent 1; Inf/NaN
// encodings are treated as ordinary large numbers.
//
// Interface: combinational, part of the one-cycle SE stage.
module seu
  import dbfp_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  fp16_t                   x     [N],
  input  fp16_t                   xmax,
  input  logic [FP_EXP_W-1:0]     emax,
  output logic signed [ALN_W:0]   p     [N],
  output logic signed [ALN_W:0]   pmax
);

  function automatic logic signed [ALN_W:0] align(input fp16_t v,
                                                  input logic [FP_EXP_W-1:0] es);
    logic [FP_EXP_W-1:0] sh;
    logic [ALN_W+31:0]   wide;
    logic [ALN_W:0]      mag;
    sh   = es - fp16_eff_exp(v);
    // Append 32 fraction bits, shift, then round on the first dropped bit.
    wide = {fp16_mant(v), 32'd0} >> sh;
    mag  = {1'b0, wide[ALN_W+31:32]} + (ALN_W+1)'(wide[31]);
    return v[FP16_W-1] ? -$signed(mag) : $signed(mag);
  endfunction

  always_comb begin
    for (int i = 0; i < N; i++) p[i] = align(x[i], emax);
    pmax = align(xmax, emax);
  end

endmodule
