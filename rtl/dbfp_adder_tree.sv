// dbfp_adder_tree: denominator of the Softmax.
//
// Multiplies each DH-LUT entry by the number of lanes that hit it and adds
// the LUT_N products in a balanced binary tree of plain integer adders.
// Every entry of the table shares one exponent, so no exponent comparison
// or mantissa alignment is needed between tree levels: the alignment was
// done once, up front, when the vector was turned into DBFP.
//
// From the paper: "we multiply and sum values from both tables using an
// adder tree structure" and the DBFP adder tree that skips per-level
// exponent comparison and shifting (Fig. 4(d)). The product-then-tree
// arrangement, widths and single-cycle timing are this design's choices.
//
// Interface: combinational, part of the one-cycle Exp stage. The sum is
// exact: SUM_W = VAL_W + CW bits cannot overflow for N lanes.
module dbfp_adder_tree
  import dbfp_pkg::*;
#(
  parameter int unsigned N     = 1024,
  localparam int unsigned CW    = $clog2(N+1),
  localparam int unsigned SUM_W = VAL_W + CW
) (
  input  logic [CW-1:0]    hit_cnt [LUT_N],
  input  lut_val_t         value   [LUT_N],
  output logic [SUM_W-1:0] sum
);

  always_comb begin
    logic [SUM_W-1:0] node [LUT_N];
    for (int i = 0; i < LUT_N; i++) node[i] = SUM_W'(hit_cnt[i]) * SUM_W'(value[i]);
    for (int l = 0; l < LUT_K; l++) begin
      for (int i = 0; i < (LUT_N >> (l + 1)); i++) node[i] = node[2*i] + node[2*i+1];
    end
    sum = node[0];
  end

endmodule
