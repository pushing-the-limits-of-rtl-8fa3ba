// tb_dbfp_sub: drives random aligned blocks (with the maximum lane present)
// and checks every DH-LUT index, the sub-LUT code and the saturation count
// against a reference that sorts the lane exponents to find the median.
module tb_dbfp_sub;
  import dbfp_pkg::*;
  import dbfp_ref_pkg::*;
  localparam int N = 128;
  logic signed [11:0] p [N];
  logic signed [11:0] pmax;
  logic [4:0] emax;
  logic [6:0] q [N];
  logic [5:0] ecode;
  logic [7:0] sat_cnt;
  int checks = 0, failures = 0, n_sat = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  dbfp_sub #(.N(N)) dut (.p, .pmax, .emax, .q, .ecode, .sat_cnt);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int dp[], rq[], rcode, rsat, mx, span;
      bit ok;
      dp   = new[N];
      span = 1 << $urandom_range(0, 11);
      mx   = $urandom_range(0, 2047);
      for (int i = 0; i < N; i++) begin
        dp[i] = mx - $urandom_range(0, span);
        if (dp[i] < -2047) dp[i] = -2047;
        if (t % 5 == 0 && i % 4 != 0) dp[i] = mx;      // many lanes at the max
        p[i] = 12'(dp[i]);
      end
      pmax = 12'(mx);
      emax = 5'($urandom_range(1, 30));
      @(posedge clk);
      ref_sub(dp, mx, int'(emax), rq, rcode, rsat);
      ok = (int'(ecode) == rcode) && (int'(sat_cnt) == rsat);
      for (int i = 0; i < N; i++) if (int'(q[i]) != rq[i]) ok = 0;
      if (rsat > 0) n_sat++;
      checks++;
      if (!ok) begin failures++; if (failures < 10) $display("FAIL t=%0d code %0d/%0d sat %0d/%0d", t, ecode, rcode, sat_cnt, rsat); end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
