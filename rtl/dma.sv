// dma: DH-LUT preload engine.
//
// Keeps the tag of the resident sub-LUT (its shared-exponent code) and
// compares it with the code the next vector needs. On a hit the Exp stage
// may proceed. On a miss it fetches the LUT_N entries of the needed sub-LUT
// from system memory, address {code, entry}, and writes them into the
// DH-LUT value table in order; the tag becomes valid again once the last
// entry is written, so the vector that waits meets a hit in the next cycle.
//
// Memory side: a request channel (mem_req_valid/ready, mem_req_addr; one
// request accepted per cycle at most) and an in-order response channel
// (mem_rsp_valid, mem_rsp_data) with no back-pressure; any latency works.
//
// From the paper: the SE stage "checks if the DH-LUT's current data
// exponent matches the required to-be-shared exponent, signalling DMA to
// preload new data". The tag compare, the address layout, the handshake
// and the blocking (single-bank) load are this design's choices.
module dma
  import dbfp_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  // lookup side
  input  logic                     need_valid,
  input  ecode_t                   need_code,
  output logic                     hit,
  output logic                     busy,
  // memory side
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output logic [ECODE_W+LUT_K-1:0] mem_req_addr,
  input  logic                     mem_rsp_valid,
  input  lut_val_t                 mem_rsp_data,
  // DH-LUT write port
  output logic                     lut_we,
  output lut_idx_t                 lut_waddr,
  output lut_val_t                 lut_wdata
);

  typedef enum logic [0:0] {S_IDLE, S_LOAD} state_t;

  state_t         state;
  logic           tag_valid;
  ecode_t         tag;
  ecode_t         code_r;
  logic [LUT_K:0] n_req;   // requests issued
  logic [LUT_K:0] n_rsp;   // responses written

  assign hit  = tag_valid && (tag == need_code) && (state == S_IDLE);
  assign busy = (state == S_LOAD);

  assign mem_req_valid = (state == S_LOAD) && (n_req < (LUT_K+1)'(LUT_N));
  assign mem_req_addr  = {code_r, n_req[LUT_K-1:0]};

  assign lut_we    = (state == S_LOAD) && mem_rsp_valid;
  assign lut_waddr = n_rsp[LUT_K-1:0];
  assign lut_wdata = mem_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tag_valid <= 1'b0;
      tag       <= '0;
      code_r    <= '0;
      n_req     <= '0;
      n_rsp     <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (need_valid && !(tag_valid && tag == need_code)) begin
            state     <= S_LOAD;
            tag_valid <= 1'b0;
            code_r    <= need_code;
            n_req     <= '0;
            n_rsp     <= '0;
          end
        end
        S_LOAD: begin
          if (mem_req_valid && mem_req_ready) n_req <= n_req + 1'b1;
          if (mem_rsp_valid) begin
            n_rsp <= n_rsp + 1'b1;
            if (n_rsp == (LUT_K+1)'(LUT_N - 1)) begin
              state     <= S_IDLE;
              tag_valid <= 1'b1;
              tag       <= code_r;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Responses only answer requests that were issued.
  a_rsp_ordered: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (state == S_LOAD) && (n_rsp < n_req));

endmodule
