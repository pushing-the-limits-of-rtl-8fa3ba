// tb_dma: presents a sequence of sub-LUT codes (repeats and changes) with a
// memory model that randomly withholds ready. Checks that a repeated code
// hits without loading, that a new code loads exactly LUT_N entries with
// the right addresses and contents in order, that hit rises only after the
// last entry, and the load time when the memory never stalls
// (LUT_N + latency + 1 cycles from the miss to the hit).
module tb_dma;
  import dbfp_pkg::*;
  import dbfp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic need_valid, hit, busy;
  logic [5:0] need_code;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [12:0] mem_req_addr;
  logic [9:0] mem_rsp_data;
  logic lut_we;
  logic [6:0] lut_waddr;
  logic [9:0] lut_wdata;
  int checks = 0, failures = 0;
  int stall_pct = 30;

  dma dut (.clk, .rst_n, .need_valid, .need_code, .hit, .busy,
           .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
           .lut_we, .lut_waddr, .lut_wdata);

  // memory with switchable stalls
  logic [9:0] pd [3];
  logic       pv [3];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_req_ready <= 0;
      for (int i = 0; i < 3; i++) begin pv[i] <= 0; pd[i] <= 0; end
    end else begin
      mem_req_ready <= $urandom_range(0, 99) >= stall_pct;
      pv[0] <= mem_req_valid && mem_req_ready;
      pd[0] <= 10'(lut_value(int'(mem_req_addr >> 7), int'(mem_req_addr) & 127));
      for (int i = 1; i < 3; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    end
  end
  assign mem_rsp_valid = pv[2];
  assign mem_rsp_data  = pd[2];

  int writes = 0, loads = 0;
  logic busy_d = 0;
  always @(posedge clk) if (rst_n) begin
    busy_d <= busy;
    if (busy && !busy_d) loads++;
    if (lut_we) begin
      checks++;
      if (int'(lut_waddr) != (writes % 128) ||
          int'(lut_wdata) != lut_value(int'(need_code), writes % 128)) begin
        failures++; if (failures < 10) $display("FAIL write %0d", writes);
      end
      writes++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic request(input int code, input bit expect_hit);
    int t0, w0, l0;
    @(negedge clk);
    need_valid = 1; need_code = 6'(code);
    t0 = 0; w0 = writes; l0 = loads;
    #1;
    checks++;
    if (hit != expect_hit) begin failures++; $display("FAIL hit=%0d for code %0d", hit, code); end
    while (!hit) begin @(negedge clk); t0++; #1; end
    checks++;
    if (expect_hit ? (writes != w0) : (writes - w0 != 128 || loads - l0 != 1)) begin
      failures++; $display("FAIL load of code %0d wrote %0d", code, writes - w0);
    end
    if (stall_pct == 0 && !expect_hit) begin
      checks++;
      if (t0 != 128 + 3 + 1) begin failures++; $display("FAIL load took %0d cycles", t0); end
    end
    @(negedge clk); need_valid = 0;
  endtask

  initial begin
    need_valid = 0; need_code = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    request(20, 0);
    request(20, 1);
    request(21, 0);
    request(4, 0);
    request(4, 1);
    stall_pct = 0;
    request(45, 0);
    request(45, 1);
    request(30, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
