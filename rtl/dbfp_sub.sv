// dbfp_sub: DBFP SUB, second half of the SE stage.
//
// Subtracts the aligned maximum from every aligned lane (an integer
// subtraction, because the block shares one exponent) and re-expresses the
// distances d_i = xmax - x_i >= 0 as a new DBFP block whose shared exponent
// is chosen by the pivot-focus policy: the pivot is the median of the lane
// exponents floor(log2 d_i). Each d_i is shifted to that pivot, rounded to
// nearest and cut to a LUT_K-bit index that addresses the DH-LUT; lanes more
// than 2^PIVOT_HR times above the pivot saturate at the last entry (their
// exp() is already small). The real exponent of the index LSB,
// emax - 25 + shift, leaves as the sub-LUT code that the DMA compares with
// the resident sub-LUT.
//
// From the paper: maximum subtraction in the SE stage, re-alignment "via
// hardware shift operations", the median as alignment pivot, the DH-LUT
// addressed by the shared exponent and the high k bits of the mantissa.
// The median-by-histogram circuit, the headroom bits, the rounding and the
// saturation are this design's choices.
//
// Interface: combinational, part of the one-cycle SE stage. sat_cnt counts
// the lanes whose index saturated.
module dbfp_sub
  import dbfp_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic signed [ALN_W:0]   p     [N],
  input  logic signed [ALN_W:0]   pmax,
  input  logic [FP_EXP_W-1:0]     emax,
  output lut_idx_t                q     [N],
  output ecode_t                  ecode,
  output logic [$clog2(N+1)-1:0]  sat_cnt
);

  localparam int unsigned CW  = $clog2(N+1);
  localparam int unsigned EBW = $clog2(D_W);

  logic [D_W-1:0] d  [N];
  logic [EBW-1:0] ed [N];
  logic [EBW-1:0] pivot;
  logic signed [7:0] shift;

  function automatic logic [EBW-1:0] msb_pos(input logic [D_W-1:0] v);
    logic [EBW-1:0] r;
    r = '0;
    for (int b = 0; b < D_W; b++) if (v[b]) r = EBW'(b);
    return r;
  endfunction

  // Distances and their exponents, one circuit per lane.
  for (genvar i = 0; i < N; i++) begin : g_dist
    always_comb begin
      logic signed [ALN_W+1:0] diff;
      diff  = (ALN_W+2)'(pmax) - (ALN_W+2)'(p[i]);
      d[i]  = diff[ALN_W+1] ? '0 : diff[D_W-1:0];
      ed[i] = msb_pos(d[i]);
    end
  end

  // Median exponent: histogram of lane exponents, first bin whose running
  // total reaches half of the lanes.
  logic [CW-1:0] hist [D_W];

  for (genvar b = 0; b < D_W; b++) begin : g_hist
    always_comb begin
      hist[b] = '0;
      for (int i = 0; i < N; i++) hist[b] += CW'(ed[i] == EBW'(b));
    end
  end

  always_comb begin
    logic [CW-1:0] cum;
    logic          found;
    cum   = '0;
    found = 1'b0;
    pivot = '0;
    for (int b = 0; b < D_W; b++) begin
      cum += hist[b];
      if (!found && cum >= CW'((N + 1) / 2)) begin
        pivot = EBW'(b);
        found = 1'b1;
      end
    end
    shift = 8'(signed'({1'b0, pivot})) + 8'(PIVOT_HR + 1) - 8'(LUT_K);
  end

  // Re-alignment to the pivot and index saturation, one circuit per lane.
  logic [N-1:0] sat;

  for (genvar i = 0; i < N; i++) begin : g_idx
    always_comb begin
      logic [D_W+LUT_K:0] v;
      if (shift > 0) begin
        // Round to nearest: add half an LSB of the result, then shift.
        v = ((D_W+LUT_K+1)'(d[i]) + ((D_W+LUT_K+1)'(1) << (shift - 8'sd1))) >> shift;
      end else begin
        v = (D_W+LUT_K+1)'(d[i]) << (-shift);
      end
      sat[i] = (v > (D_W+LUT_K+1)'(LUT_N - 1));
      q[i]   = sat[i] ? lut_idx_t'(LUT_N - 1) : v[LUT_K-1:0];
    end
  end

  always_comb begin
    sat_cnt = '0;
    for (int i = 0; i < N; i++) sat_cnt += CW'(sat[i]);
    ecode = ecode_t'(8'(signed'({3'b0, emax})) - 8'sd25 + shift + 8'(ECODE_OFS));
  end

endmodule
