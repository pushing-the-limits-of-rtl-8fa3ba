// tb_dbattn_softmax: end-to-end test of the DBFP Softmax engine at its
// default size (N = 1024 lanes, one 1024-score attention row per vector).
//
// Streams FP16 vectors of several kinds (random scores over different
// ranges, attention-like Gaussian scores, constant vectors, outliers,
// negative-only vectors, zeros and subnormals) through the engine and
// compares every output lane and the shared exponent with the bit-exact
// reference model, and the probabilities with a floating-point Softmax.
// Phase 1 uses random input bubbles, random output back-pressure and a
// memory that withholds ready; phase 2 sends permutations of one vector
// back to back so that all but the first hit the resident sub-LUT, and
// checks a 4-cycle latency and one vector per cycle. Every mechanism
// (DH-LUT miss and preload, hit, back-pressure, input bubble, index
// saturation, back-to-back streaming) must occur at least once.
module tb_dbattn_softmax;
  import dbfp_pkg::*;
  import dbfp_ref_pkg::*;

  localparam int N  = 1024;
  localparam int CW = $clog2(N + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  fp16_t       in_x [N];
  logic [9:0]  out_mant [N];
  logic signed [5:0] out_exp;
  logic        mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [12:0] mem_req_addr;
  logic [9:0]  mem_rsp_data;
  logic        lut_loading;
  logic [CW-1:0] sat_lanes;
  logic [127:0]  lut_bitmap;

  dbattn_softmax dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_x, .out_valid, .out_ready,
    .out_mant, .out_exp, .mem_req_valid, .mem_req_ready, .mem_req_addr,
    .mem_rsp_valid, .mem_rsp_data, .lut_loading, .sat_lanes, .lut_bitmap);

  int mem_stall_pct = 20;
  lut_mem_model #(.AW(13), .LAT(3), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected results, in order
  typedef struct { int mant[N]; int oexp; real y[N]; int t_in; bit timed; bit acc; } exp_t;
  exp_t exp_q[$];
  logic [15:0] vec_q[$];

  // mechanism counters
  int n_loads = 0, n_vec_out = 0, n_bp = 0, n_bubble = 0, n_sat = 0, n_b2b = 0;
  int last_out_cycle = -10, n_lat_ok = 0;
  real max_err = 0.0;
  logic lut_loading_d = 1'b0;
  int load_start = 0, max_load_cycles = 0;

  bit phase2 = 0;
  int p_in_bubble = 30, p_out_bp = 30;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  // Build a vector, compute its expected result, queue it.
  task automatic push_vec(input logic [15:0] v[N], input bit timed, input bit acc = 1);
    exp_t e;
    logic [15:0] dv[];
    int m[], oe, code, ns;
    real y[];
    dv = new[N];
    foreach (v[i]) dv[i] = v[i];
    ref_engine(dv, m, oe, code, ns);
    float_softmax(dv, y);
    foreach (v[i]) begin e.mant[i] = m[i]; e.y[i] = y[i]; end
    e.oexp  = oe;
    e.timed = timed;
    e.acc   = acc;
    e.t_in  = -1;
    exp_q.push_back(e);
    foreach (v[i]) vec_q.push_back(v[i]);
  endtask

  // Source process
  int n_sent = 0;
  int total_vec;
  exp_t inflight[$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) begin
        for (int i = 0; i < N; i++) void'(vec_q.pop_front());
        n_sent++;
      end
      if (!in_valid) n_bubble++;
      if (out_valid && !out_ready) n_bp++;
      if (sat_lanes != '0) n_sat++;
      lut_loading_d <= lut_loading;
      if (lut_loading && !lut_loading_d) begin n_loads++; load_start = cycle; end
      if (!lut_loading && lut_loading_d && (cycle - load_start) > max_load_cycles)
        max_load_cycles = cycle - load_start;
    end
  end

  // Drive inputs between edges.
  always @(negedge clk) begin
    if (rst_n) begin
      bit have;
      have = (vec_q.size() >= N);
      in_valid  <= have && (phase2 || ($urandom_range(0, 99) >= p_in_bubble));
      out_ready <= phase2 || ($urandom_range(0, 99) >= p_out_bp);
      for (int i = 0; i < N; i++) in_x[i] <= have ? vec_q[i] : 16'h0;
    end
  end

  // Accept timestamps.
  int t_in_q[$];
  always @(posedge clk) if (rst_n && in_valid && in_ready) t_in_q.push_back(cycle);

  // Sink / checker
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      exp_t e;
      int   t0;
      bit   ok;
      real  s, err;
      e  = exp_q.pop_front();
      t0 = t_in_q.pop_front();
      ok = (int'(out_exp) == e.oexp);
      s  = 0.0;
      for (int i = 0; i < N; i++) begin
        real pr;
        if (int'(out_mant[i]) != e.mant[i]) ok = 0;
        pr  = real'(out_mant[i]) * (2.0 ** real'(int'(out_exp)));
        s  += pr;
        err = (pr > e.y[i]) ? pr - e.y[i] : e.y[i] - pr;
        if (e.acc && err > max_err) max_err = err;
      end
      check(ok, $sformatf("vector %0d differs from reference", n_vec_out));
      check(s > 0.97 && s < 1.03, $sformatf("vector %0d probabilities sum to %f", n_vec_out, s));
      if (e.timed) begin
        check(cycle - t0 == 4, $sformatf("latency %0d cycles, expected 4", cycle - t0));
        if (cycle - t0 == 4) n_lat_ok++;
      end
      if (last_out_cycle == cycle - 1) n_b2b++;
      last_out_cycle = cycle;
      n_vec_out++;
    end
  end

  // Stall detector: a vector that is owed but has not come out for 1000
  // cycles (a DH-LUT load takes about 130) means the pipeline lost it.
  int idle = 0;
  always @(posedge clk) begin
    idle <= (exp_q.size() == 0 || (out_valid && out_ready) || !out_ready) ? 0 : idle + 1;
    if (idle == 1000) begin
      failures += exp_q.size();
      $display("FAIL %0d vectors never came out", exp_q.size());
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // Watchdog
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] v [N];
    logic [15:0] base [N];
    in_valid = 0; out_ready = 0;
    for (int i = 0; i < N; i++) in_x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- phase 1: mixed vectors, random bubbles and back-pressure ----
    for (int k = 0; k < 27; k++) begin
      case (k % 9)
        0: for (int i = 0; i < N; i++) v[i] = rand_fp16(12, 17, 0);     // |x| in [1/8, 8)
        1: for (int i = 0; i < N; i++) v[i] = rand_fp16(8, 19, 0);      // wide range
        2: for (int i = 0; i < N; i++) v[i] = real_to_fp16(gauss() * 3.0);  // attention-like
        3: for (int i = 0; i < N; i++) v[i] = 16'h3C00;                 // all 1.0
        4: begin                                                       // outlier
             for (int i = 0; i < N; i++) v[i] = rand_fp16(13, 15, 0);
             v[$urandom_range(0, N-1)] = 16'h4A00;                     // 12.0
           end
        5: for (int i = 0; i < N; i++) v[i] = rand_fp16(14, 18, 1);     // all negative
        6: for (int i = 0; i < N; i++)                                  // zeros, subnormals
             v[i] = (i % 3 == 0) ? 16'h0000 : (i % 3 == 1) ? {1'($urandom), 5'd0, 10'($urandom)}
                                                           : rand_fp16(10, 14, 0);
        7: for (int i = 0; i < N; i++) v[i] = real_to_fp16(gauss() * 8.0);
        default:                                                       // 3/4 at the max
             for (int i = 0; i < N; i++) v[i] = (i % 4 == 0) ? 16'hC800 : 16'h4400;
      endcase
      // The last kind saturates most distances (median pivot at zero), so
      // it is compared bit-exactly but left out of the accuracy figure.
      push_vec(v, 0, (k % 9) != 8);
    end
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);

    // ---- phase 2: one vector, permuted, back to back ----
    for (int i = 0; i < N; i++) base[i] = real_to_fp16(gauss() * 2.0);
    push_vec(base, 0);                     // may miss
    wait (exp_q.size() == 0);
    @(negedge clk); phase2 = 1;
    for (int k = 0; k < 16; k++) begin
      for (int i = 0; i < N; i++) v[i] = base[i];
      for (int i = N - 1; i > 0; i--) begin
        int j; logic [15:0] t;
        j = $urandom_range(0, i); t = v[i]; v[i] = v[j]; v[j] = t;
      end
      push_vec(v, 1);
    end
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);

    $display("vectors=%0d loads=%0d max_load_cycles=%0d backpressure=%0d bubbles=%0d sat=%0d b2b=%0d lat4=%0d max_abs_err=%f",
             n_vec_out, n_loads, max_load_cycles, n_bp, n_bubble, n_sat, n_b2b, n_lat_ok, max_err);
    check(n_vec_out == 44, "all vectors came out");
    check(n_loads > 0, "a DH-LUT miss and preload happened");
    check(n_vec_out - n_loads > 0, "a DH-LUT hit happened");
    check(n_bp > 0, "output back-pressure happened");
    check(n_bubble > 0, "an input bubble happened");
    check(n_sat > 0, "an index saturated");
    check(n_b2b >= 15, "vectors streamed back to back");
    check(n_lat_ok == 16, "4-cycle latency on hits");
    check(max_err < 0.03, "probabilities within 0.03 of floating-point Softmax");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Box-Muller normal sample.
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000000.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

endmodule
