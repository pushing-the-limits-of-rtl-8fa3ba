// lut_mem_model: behavioural model of the system memory that holds the
// DH-LUT sub-tables (not part of the engine; testbench use only).
//
// Address {code, q} returns dbfp_ref_pkg::lut_value(code, q). Requests are
// accepted when req_ready is high (randomly withheld when STALL_PCT > 0)
// and answered in order LAT cycles later, one response per cycle.
module lut_mem_model #(
  parameter int AW        = 13,
  parameter int LAT       = 3,
  parameter int STALL_PCT = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [AW-1:0] req_addr,
  output logic          rsp_valid,
  output logic [9:0]    rsp_data
);
  import dbfp_ref_pkg::*;

  int unsigned reads;
  logic [9:0]  pipe_d [LAT];
  logic        pipe_v [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      reads     <= 0;
      for (int i = 0; i < LAT; i++) begin pipe_v[i] <= 1'b0; pipe_d[i] <= '0; end
    end else begin
      req_ready <= ($urandom_range(0, 99) >= STALL_PCT);
      pipe_v[0] <= req_valid && req_ready;
      pipe_d[0] <= 10'(lut_value(int'(req_addr >> K), int'(req_addr) & ((1 << K) - 1)));
      for (int i = 1; i < LAT; i++) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
      if (req_valid && req_ready) reads <= reads + 1;
    end
  end

  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_data  = pipe_d[LAT-1];
endmodule
