// tb_dbfp_div: random numerators and denominators (small, near powers of
// two, maximum); compares every quotient mantissa and the shared exponent
// with a real-valued reciprocal model, and checks the quotient against the
// exact ratio within one percent plus one output LSB.
module tb_dbfp_div;
  import dbfp_pkg::*;
  import dbfp_ref_pkg::*;
  localparam int N = 128;
  logic [9:0]  num [N];
  logic [17:0] sum;
  logic [9:0]  out_mant [N];
  logic signed [5:0] out_exp;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  dbfp_div #(.N(N), .SUM_W(18), .DIV_GROUP(64)) dut (.num, .sum, .out_mant, .out_exp);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int dn[], rm[], re;
      longint s;
      bit ok;
      dn = new[N];
      s  = 0;
      for (int i = 0; i < N; i++) begin
        num[i] = (t % 4 == 0) ? 10'($urandom_range(0, 40)) : 10'($urandom);
        dn[i]  = int'(num[i]);
        s     += dn[i];
      end
      case (t % 5)
        0: s = (longint'(1) << $urandom_range(0, 17));
        1: s = (longint'(1) << $urandom_range(1, 17)) - 1;
        2: s = 18'h3FFFF;
        default: ;
      endcase
      if (s == 0) s = 1;
      sum = 18'(s);
      @(posedge clk);
      ref_div(dn, s, rm, re);
      ok = (int'(out_exp) == re);
      for (int i = 0; i < N; i++) begin
        real q, ex;
        if (int'(out_mant[i]) != rm[i]) ok = 0;
        q  = real'(out_mant[i]) * (2.0 ** real'(int'(out_exp)));
        ex = real'(dn[i]) / real'(s);
        if (out_mant[i] != 10'h3FF &&
            ((q - ex) > 0.01 * ex + 2.0 ** real'(int'(out_exp)) || (ex - q) > 0.01 * ex + 2.0 ** real'(int'(out_exp)))) ok = 0;
      end
      checks++;
      if (!ok) begin failures++; if (failures < 10) $display("FAIL t=%0d sum=%0d", t, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
