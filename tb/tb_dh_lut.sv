// tb_dh_lut: checks reset to zero, then writes random entries and reads
// them back through random lane indices and through the full-table port,
// against a shadow array.
module tb_dh_lut;
  import dbfp_pkg::*;
  localparam int N = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we;
  logic [6:0] waddr;
  logic [9:0] wdata;
  logic [6:0] q [N];
  logic [9:0] v [N];
  logic [9:0] table_o [128];
  logic [9:0] shadow [128];
  int checks = 0, failures = 0;

  dh_lut #(.N(N)) dut (.clk, .rst_n, .we, .waddr, .wdata, .q, .v, .table_o);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string what);
    bit ok;
    ok = 1;
    for (int i = 0; i < N; i++) if (v[i] !== shadow[q[i]]) ok = 0;
    for (int e = 0; e < 128; e++) if (table_o[e] !== shadow[e]) ok = 0;
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < N; i++) q[i] = 7'($urandom);
    for (int e = 0; e < 128; e++) shadow[e] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 compare("reset");
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = 7'($urandom); wdata = 10'($urandom);
      for (int i = 0; i < N; i++) q[i] = 7'($urandom);
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1 compare($sformatf("cycle %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
