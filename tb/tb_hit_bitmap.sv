// tb_hit_bitmap: random lane indices (uniform, clustered, all equal) are
// counted per entry and compared with the block's hit counts and bitmap;
// with en low everything must be zero.
module tb_hit_bitmap;
  import dbfp_pkg::*;
  localparam int N = 128;
  logic en;
  logic [6:0] q [N];
  logic [7:0] hit_cnt [128];
  logic [127:0] bitmap;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  hit_bitmap #(.N(N)) dut (.en, .q, .hit_cnt, .bitmap);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int cnt[128];
      bit ok;
      en = (t % 10) != 9;
      foreach (cnt[e]) cnt[e] = 0;
      for (int i = 0; i < N; i++) begin
        q[i] = (t % 3 == 0) ? 7'($urandom) : (t % 3 == 1) ? 7'($urandom_range(0, 5)) : 7'(t);
        if (en) cnt[q[i]]++;
      end
      @(posedge clk);
      ok = 1;
      for (int e = 0; e < 128; e++) begin
        if (int'(hit_cnt[e]) != cnt[e]) ok = 0;
        if (bitmap[e] != (cnt[e] > 0)) ok = 0;
      end
      checks++;
      if (!ok) begin failures++; if (failures < 10) $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
