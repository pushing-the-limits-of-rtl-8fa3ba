// dbfp_pkg: widths, field layouts and small helper functions shared by the
// DBFP Softmax engine.
//
// Number formats used through the pipeline:
//   * input        : IEEE FP16 (1 sign, 5 exponent, 10 fraction bits).
//   * aligned x    : one DBFP block per vector. All lanes share the block
//                    exponent eA (the largest element exponent) and keep a
//                    signed private mantissa of ALN_W magnitude bits, so
//                    x = p * 2^(eA-25).
//   * index d      : d = xmax - x >= 0 re-aligned to a pivot (median) shared
//                    exponent and cut to LUT_K bits; it addresses the DH-LUT.
//   * exp value    : unsigned VAL_W-bit fraction, exp(-d) ~= v * 2^-VAL_W.
//   * output       : DBFP block: per-lane OUT_W-bit mantissa, one shared
//                    signed exponent, prob = mant * 2^exp.
// The 10-bit value/output widths and the 7-bit table index follow the paper
// ("FP16 operations using 10-bit integer operations", "7-bit DH-LUT"); the
// remaining widths are this design's own choice and are derived below.
package dbfp_pkg;

  localparam int unsigned FP16_W   = 16;
  localparam int unsigned FP_EXP_W = 5;
  localparam int unsigned FP_FRAC_W = 10;
  localparam int unsigned FP_BIAS  = 15;

  // Aligned private mantissa magnitude: hidden one + 10 fraction bits.
  localparam int unsigned ALN_W = FP_FRAC_W + 1;          // 11
  // xmax - x of two aligned mantissas fits one more bit.
  localparam int unsigned D_W   = ALN_W + 1;              // 12

  // DH-LUT: 2^LUT_K entries per sub-LUT, VAL_W bits per entry.
  localparam int unsigned LUT_K    = 7;
  localparam int unsigned LUT_N    = 1 << LUT_K;
  localparam int unsigned VAL_W    = 10;
  // Headroom bits of the index above the pivot exponent: elements up to
  // 2^PIVOT_HR times the pivot magnitude keep their value, larger saturate.
  localparam int unsigned PIVOT_HR = 0;

  // Shared exponent code of a sub-LUT: real exponent of the index LSB + ECODE_OFS.
  localparam int unsigned ECODE_W   = 6;
  localparam int signed   ECODE_OFS = 32;

  // Divider: reciprocal mantissa table and output mantissa.
  localparam int unsigned RCP_IDX_W = 8;
  localparam int unsigned RCP_W     = 11;
  localparam int unsigned OUT_W     = 10;
  localparam int unsigned OEXP_W    = 6;

  typedef logic [FP16_W-1:0] fp16_t;
  typedef logic [LUT_K-1:0]  lut_idx_t;
  typedef logic [VAL_W-1:0]  lut_val_t;
  typedef logic [ECODE_W-1:0] ecode_t;

  // Total-order key of an FP16 value: larger key <=> larger value (-0 < +0).
  function automatic logic [FP16_W-1:0] fp16_key(input fp16_t x);
    return x[FP16_W-1] ? ~x : {1'b1, x[FP16_W-2:0]};
  endfunction

  // Effective exponent (subnormals use 1) and mantissa with hidden bit.
  function automatic logic [FP_EXP_W-1:0] fp16_eff_exp(input fp16_t x);
    logic [FP_EXP_W-1:0] e;
    e = x[FP16_W-2 -: FP_EXP_W];
    return (e == '0) ? FP_EXP_W'(1) : e;
  endfunction

  function automatic logic [ALN_W-1:0] fp16_mant(input fp16_t x);
    return {(x[FP16_W-2 -: FP_EXP_W] != '0), x[FP_FRAC_W-1:0]};
  endfunction

endpackage
