// tb_dbfp_adder_tree: random hit counts (summing to at most N) and random
// table values; the sum of count x value is compared with a plain loop.
module tb_dbfp_adder_tree;
  import dbfp_pkg::*;
  localparam int N = 128;
  logic [7:0] hit_cnt [128];
  logic [9:0] value [128];
  logic [17:0] sum;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  dbfp_adder_tree #(.N(N)) dut (.hit_cnt, .value, .sum);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      longint s;
      s = 0;
      foreach (hit_cnt[e]) begin hit_cnt[e] = 0; value[e] = 10'($urandom); end
      if (t == 0) foreach (value[e]) value[e] = 10'h3FF;
      for (int i = 0; i < N; i++) begin
        int e;
        e = (t % 2) ? $urandom_range(0, 127) : $urandom_range(120, 127);
        hit_cnt[e]++;
      end
      foreach (hit_cnt[e]) s += longint'(hit_cnt[e]) * longint'(value[e]);
      @(posedge clk);
      checks++;
      if (longint'(sum) != s) begin failures++; if (failures < 10) $display("FAIL t=%0d %0d/%0d", t, sum, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
