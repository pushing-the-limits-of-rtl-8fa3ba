// vector_buffer: one pipeline stage register between two engine stages.
//
// Holds one whole vector (any packed payload type T) plus a valid flag and
// implements a valid/ready handshake: a word moves in when in_valid and
// in_ready are both high at a clock edge, and out when out_valid and
// out_ready are. in_ready is high when the buffer is empty or is being
// emptied in the same cycle, so a full pipeline moves one vector per cycle
// and a stall anywhere downstream holds every vector in place without loss.
//
// The paper draws a "Vector Buffer" pipeline stage between every pair of
// stages (Max, SE, Exp, Div); the handshake and reset behaviour (empty after
// reset, payload not reset) are this design's choices.
module vector_buffer #(
  parameter type T = logic [7:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) out_data <= in_data;
  end

  // A held word must not change while it waits for the consumer.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
