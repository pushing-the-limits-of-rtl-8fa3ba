// dbattn_softmax: DBFP Softmax engine (DB-Attn hardware).
//
// Computes softmax(x) of an N-lane FP16 vector with integer logic only, in
// four pipeline stages separated by vector buffers, one vector per cycle:
//   Max : round_comp_unit finds xmax and the largest element exponent.
//   SE  : seu aligns the vector and xmax to one shared exponent (a DBFP
//         block); dbfp_sub subtracts xmax and re-aligns xmax - x to the
//         median (pivot) exponent, giving a LUT_K-bit DH-LUT index per lane
//         and the shared-exponent code of the sub-LUT the vector needs.
//   Exp : the dma checks that code against the resident sub-LUT. On a hit
//         every lane reads its exp value from dh_lut (numerators), the
//         hit_bitmap counts the lanes per entry and dbfp_adder_tree adds
//         count x value (denominator). On a miss the vector waits in the
//         SE/Exp buffer while the dma loads the sub-LUT from memory.
//   Div : dbfp_div divides every numerator by the denominator in one cycle.
// The result is a DBFP block: prob[i] ~= out_mant[i] * 2^out_exp.
//
// Handshakes: in_valid/in_ready and out_valid/out_ready are valid/ready
// pairs (transfer when both are high at a clock edge). Without stalls a
// vector accepted at edge t leaves at edge t+4. The memory port (request
// valid/ready, in-order responses without back-pressure) serves DH-LUT
// loads: LUT_N reads per miss. Status: lut_loading is high during a
// load; sat_lanes and lut_bitmap describe the vector in the Exp stage (how
// many lanes saturated their index, which DH-LUT entries it hits). rst_n is an active-low asynchronous reset;
// after it the DH-LUT holds no valid sub-LUT, so the first vector misses.
//
// The stage split, the blocks and their connections follow Fig. 4(a) of
// the DB-Attn paper; the formats, handshakes and the blocking DH-LUT load
// are this design's own choices (see each block's header).
module dbattn_softmax
  import dbfp_pkg::*;
#(
  parameter int unsigned N         = 1024,
  parameter int unsigned DIV_GROUP = 64,
  localparam int unsigned CW       = $clog2(N+1),
  localparam int unsigned SUM_W    = VAL_W + CW,
  localparam int unsigned MA_W     = ECODE_W + LUT_K
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input vector
  input  logic                     in_valid,
  output logic                     in_ready,
  input  fp16_t                    in_x     [N],
  // output DBFP block
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [OUT_W-1:0]         out_mant [N],
  output logic signed [OEXP_W-1:0] out_exp,
  // DH-LUT memory port
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output logic [MA_W-1:0]          mem_req_addr,
  input  logic                     mem_rsp_valid,
  input  lut_val_t                 mem_rsp_data,
  // status
  output logic                     lut_loading,
  output logic [CW-1:0]            sat_lanes,
  output logic [LUT_N-1:0]         lut_bitmap
);

  typedef struct packed {
    logic [N-1:0][FP16_W-1:0] x;
    fp16_t                    xmax;
    logic [FP_EXP_W-1:0]      emax;
  } s1_t;

  typedef struct packed {
    logic [N-1:0][LUT_K-1:0] q;
    ecode_t                  ecode;
    logic [CW-1:0]           sat;
  } s2_t;

  typedef struct packed {
    logic [N-1:0][VAL_W-1:0] num;
    logic [SUM_W-1:0]        sum;
  } s3_t;

  typedef struct packed {
    logic [N-1:0][OUT_W-1:0]  mant;
    logic signed [OEXP_W-1:0] oexp;
  } s4_t;

  s1_t s1_in, s1_q;
  s2_t s2_in, s2_q;
  s3_t s3_in, s3_q;
  s4_t s4_in, s4_q;

  logic b1_ov, b1_or, b2_ir, b2_ov, b2_or, b3_iv, b3_ir, b3_ov, b3_or, b4_ir;
  logic lut_hit;

  // ---------------- Max stage ----------------
  fp16_t               xmax;
  logic [FP_EXP_W-1:0] emax;

  round_comp_unit #(.N(N)) u_max (.x(in_x), .xmax(xmax), .emax(emax));

  always_comb begin
    for (int i = 0; i < N; i++) s1_in.x[i] = in_x[i];
    s1_in.xmax = xmax;
    s1_in.emax = emax;
  end

  vector_buffer #(.T(s1_t)) u_vb1 (
    .clk, .rst_n, .in_valid(in_valid), .in_ready(in_ready), .in_data(s1_in),
    .out_valid(b1_ov), .out_ready(b1_or), .out_data(s1_q));

  // ---------------- SE stage -----------------
  fp16_t                 s1_x [N];
  logic signed [ALN_W:0] p    [N];
  logic signed [ALN_W:0] pmax;
  lut_idx_t              q_se [N];
  ecode_t                ecode;
  logic [CW-1:0]         sat_cnt;

  always_comb for (int i = 0; i < N; i++) s1_x[i] = s1_q.x[i];

  seu #(.N(N)) u_seu (.x(s1_x), .xmax(s1_q.xmax), .emax(s1_q.emax), .p(p), .pmax(pmax));

  dbfp_sub #(.N(N)) u_sub (.p(p), .pmax(pmax), .emax(s1_q.emax),
                           .q(q_se), .ecode(ecode), .sat_cnt(sat_cnt));

  always_comb begin
    for (int i = 0; i < N; i++) s2_in.q[i] = q_se[i];
    s2_in.ecode = ecode;
    s2_in.sat   = sat_cnt;
  end

  assign b1_or = b2_ir;

  vector_buffer #(.T(s2_t)) u_vb2 (
    .clk, .rst_n, .in_valid(b1_ov), .in_ready(b2_ir), .in_data(s2_in),
    .out_valid(b2_ov), .out_ready(b2_or), .out_data(s2_q));

  // ---------------- Exp stage ----------------
  lut_idx_t      q_ex    [N];
  lut_val_t      num     [N];
  lut_val_t      lut_tab [LUT_N];
  logic [CW-1:0] hit_cnt [LUT_N];
  logic [SUM_W-1:0] sum;
  logic          lut_we;
  lut_idx_t      lut_waddr;
  lut_val_t      lut_wdata;

  always_comb for (int i = 0; i < N; i++) q_ex[i] = s2_q.q[i];

  dma u_dma (
    .clk, .rst_n,
    .need_valid(b2_ov), .need_code(s2_q.ecode), .hit(lut_hit), .busy(lut_loading),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
    .lut_we, .lut_waddr, .lut_wdata);

  dh_lut #(.N(N)) u_lut (
    .clk, .rst_n, .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata),
    .q(q_ex), .v(num), .table_o(lut_tab));

  hit_bitmap #(.N(N)) u_hit (.en(b2_ov && lut_hit), .q(q_ex), .hit_cnt(hit_cnt), .bitmap(lut_bitmap));

  dbfp_adder_tree #(.N(N)) u_tree (.hit_cnt(hit_cnt), .value(lut_tab), .sum(sum));

  always_comb begin
    for (int i = 0; i < N; i++) s3_in.num[i] = num[i];
    s3_in.sum = sum;
  end

  assign b3_iv     = b2_ov && lut_hit;
  assign b2_or     = b3_ir && lut_hit;
  assign sat_lanes = b2_ov ? s2_q.sat : '0;

  vector_buffer #(.T(s3_t)) u_vb3 (
    .clk, .rst_n, .in_valid(b3_iv), .in_ready(b3_ir), .in_data(s3_in),
    .out_valid(b3_ov), .out_ready(b3_or), .out_data(s3_q));

  // ---------------- Div stage ----------------
  lut_val_t                 s3_num [N];
  logic [OUT_W-1:0]         mant   [N];
  logic signed [OEXP_W-1:0] oexp;

  always_comb for (int i = 0; i < N; i++) s3_num[i] = s3_q.num[i];

  dbfp_div #(.N(N), .SUM_W(SUM_W), .DIV_GROUP(DIV_GROUP)) u_div (
    .num(s3_num), .sum(s3_q.sum), .out_mant(mant), .out_exp(oexp));

  always_comb begin
    for (int i = 0; i < N; i++) s4_in.mant[i] = mant[i];
    s4_in.oexp = oexp;
  end

  assign b3_or = b4_ir;

  vector_buffer #(.T(s4_t)) u_vb4 (
    .clk, .rst_n, .in_valid(b3_ov), .in_ready(b4_ir), .in_data(s4_in),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(s4_q));

  always_comb begin
    for (int i = 0; i < N; i++) out_mant[i] = s4_q.mant[i];
    out_exp = s4_q.oexp;
  end

  // The denominator always contains exp(0) of the maximum lane.
  a_sum_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    b3_ov |-> (s3_q.sum != '0));

endmodule
