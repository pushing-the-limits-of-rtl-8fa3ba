// dh_lut: value table of the Dynamic Hierarchical LUT (DH-LUT).
//
// Holds the one sub-LUT that is resident on the engine: LUT_N = 2^LUT_K
// entries of VAL_W bits, entry q being exp(-q * 2^E) as an unsigned
// fraction, where E is the shared exponent of the sub-LUT (kept by the
// DMA as its tag). All N lanes read it at once, each with its own index
// (the numerator path), and the full table is also presented in parallel
// to the adder tree (the denominator path). Writes come from the DMA, one
// entry per cycle.
//
// From the paper: a value table "storing exp values for approximation",
// 2^n entries for n extracted bits, a 7-bit table by default, sub-LUTs
// loaded by the DMA according to the shared exponent. Register storage,
// the single write port and the reset to zero are this design's choices.
//
// Timing: reads are combinational from the registers; a write at a clock
// edge is visible after that edge.
module dh_lut
  import dbfp_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      we,
  input  lut_idx_t  waddr,
  input  lut_val_t  wdata,
  input  lut_idx_t  q     [N],
  output lut_val_t  v     [N],
  output lut_val_t  table_o [LUT_N]
);

  lut_val_t mem [LUT_N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LUT_N; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) v[i] = mem[q[i]];
    for (int i = 0; i < LUT_N; i++) table_o[i] = mem[i];
  end

endmodule
