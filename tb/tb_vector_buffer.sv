// tb_vector_buffer: random valid/ready traffic through one stage register;
// checks order, no loss or duplication, data held under back-pressure and
// full throughput (one word per cycle) when the consumer is always ready.
module tb_vector_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  int checks = 0, failures = 0;
  int sent = 0, rcvd = 0, stream_phase = 0, stream_cycles = 0;
  logic [15:0] exp_q[$];

  vector_buffer #(.T(logic [15:0])) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                                         .out_valid, .out_ready, .out_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        held_v = 0;
  logic [15:0] held_d;
  always @(posedge clk) if (rst_n) begin
    if (held_v) begin
      checks++;
      if (!out_valid || out_data !== held_d) begin failures++; $display("FAIL hold"); end
    end
    held_v <= out_valid && !out_ready;
    held_d <= out_data;
    if (in_valid && in_ready) begin exp_q.push_back(in_data); sent++; end
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || exp_q.pop_front() !== out_data) begin
        failures++; $display("FAIL order at %0d", rcvd);
      end
      rcvd++;
      if (stream_phase) stream_cycles++;
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(0, 1);
        in_data  = 16'($urandom);
      end
      out_ready = $urandom_range(0, 2) != 0;
    end
    // streaming: always valid, always ready
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    stream_phase = 1;
    for (int c = 0; c < 100; c++) begin
      in_valid = 1; in_data = 16'($urandom);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (stream_cycles != 100) begin failures++; $display("FAIL throughput %0d", stream_cycles); end
    checks++;
    if (sent != rcvd || sent < 500) begin failures++; $display("FAIL count %0d %0d", sent, rcvd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
