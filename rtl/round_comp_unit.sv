// round_comp_unit: Max stage of the Softmax engine.
//
// Finds the largest value of an N-lane FP16 vector and the largest element
// exponent. The comparison runs in rounds, as a balanced tree: in each round
// neighbouring candidates are compared pairwise and the winner moves on, so
// an N-lane vector needs ceil(log2 N) rounds. FP16 values are compared
// through an order-preserving integer key (sign-magnitude flipped to an
// unsigned order), so no floating-point comparator is needed.
//
// The paper names this block ("Round Comp. Unit") and states that the Max
// stage finds the maximum of the input vector. The pairwise tree, the key
// trick and the second output (largest exponent, used by the SEU as the
// alignment exponent) are this design's choices.
//
// Interface: purely combinational; the surrounding vector buffer registers
// the result, so the whole Max stage takes one clock cycle.
module round_comp_unit
  import dbfp_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  fp16_t                 x    [N],
  output fp16_t                 xmax,
  output logic [FP_EXP_W-1:0]   emax
);

  localparam int unsigned ROUNDS = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned P      = 1 << ROUNDS;

  always_comb begin
    fp16_t               v [P];
    logic [FP_EXP_W-1:0] e [P];
    for (int i = 0; i < P; i++) begin
      // Pad with the smallest key (-inf like pattern) and exponent 0.
      v[i] = (i < N) ? x[i] : 16'hFFFF;
      e[i] = (i < N) ? fp16_eff_exp(x[i]) : '0;
    end
    for (int r = 0; r < ROUNDS; r++) begin
      for (int i = 0; i < (P >> (r + 1)); i++) begin
        v[i] = (fp16_key(v[2*i+1]) > fp16_key(v[2*i])) ? v[2*i+1] : v[2*i];
        e[i] = (e[2*i+1] > e[2*i]) ? e[2*i+1] : e[2*i];
      end
    end
    xmax = v[0];
    emax = e[0];
  end

endmodule
