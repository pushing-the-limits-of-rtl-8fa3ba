// tb_seu: checks the alignment of random FP16 vectors (and of their
// maximum) to the largest exponent against a real-valued scaling with
// round-half-up on the magnitude.
module tb_seu;
  import dbfp_pkg::*;
  import dbfp_ref_pkg::*;
  localparam int N = 128;
  fp16_t x [N];
  fp16_t xmax;
  logic [4:0] emax;
  logic signed [11:0] p [N];
  logic signed [11:0] pmax;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  seu #(.N(N)) dut (.x, .xmax, .emax, .p, .pmax);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic [15:0] dv[];
      logic [15:0] rx;
      int re;
      bit ok;
      dv = new[N];
      for (int i = 0; i < N; i++) begin
        x[i]  = (t % 3 == 0) ? rand_fp16(0, 30, 0) : (t % 3 == 1) ? rand_fp16(12, 18, 0)
                                                                   : rand_fp16(0, 2, 0);
        dv[i] = x[i];
      end
      ref_max(dv, rx, re);
      xmax = rx; emax = 5'(re);
      @(posedge clk);
      ok = (int'(pmax) == ref_align(rx, re));
      for (int i = 0; i < N; i++) if (int'(p[i]) != ref_align(x[i], re)) ok = 0;
      checks++;
      if (!ok) begin failures++; if (failures < 10) $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
