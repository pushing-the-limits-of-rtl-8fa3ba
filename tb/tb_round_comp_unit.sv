// tb_round_comp_unit: checks the Max stage on random FP16 vectors (mixed
// signs, narrow and wide exponent ranges, zeros, subnormals, all-negative
// vectors) against a real-valued maximum search.
module tb_round_comp_unit;
  import dbfp_pkg::*;
  import dbfp_ref_pkg::*;
  localparam int N = 128;
  fp16_t x [N];
  fp16_t xmax;
  logic [4:0] emax;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  round_comp_unit #(.N(N)) dut (.x, .xmax, .emax);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic [15:0] dv[];
      logic [15:0] rx;
      int re;
      dv = new[N];
      for (int i = 0; i < N; i++) begin
        case (t % 4)
          0: x[i] = rand_fp16(0, 30, 0);
          1: x[i] = rand_fp16(13, 16, 0);
          2: x[i] = rand_fp16(10, 20, 1);
          default: x[i] = (i % 5 == 0) ? 16'h0000 : rand_fp16(0, 3, 0);
        endcase
        dv[i] = x[i];
      end
      @(posedge clk);
      ref_max(dv, rx, re);
      checks++;
      if (fp16_to_real(xmax) != fp16_to_real(rx) || int'(emax) != re) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d xmax=%h exp %h emax=%0d exp %0d", t, xmax, rx, emax, re);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
