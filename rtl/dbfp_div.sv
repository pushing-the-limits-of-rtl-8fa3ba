// dbfp_div: DBFP divider of the Div stage.
//
// Divides every lane's numerator (an exp value, VAL_W bits) by the common
// denominator in one cycle. Because all numerators share one exponent and
// the divisor is the same for every lane, the divisor is normalised once
// per group of DIV_GROUP lanes: an exponent step (position es of its
// leading one) and a mantissa reciprocal lookup (the RCP_IDX_W bits below
// the leading one address a table of rounded 2^RCP_W / mantissa values).
// Each lane then multiplies its numerator by the reciprocal mantissa with a
// shift-and-add array (one shifted copy of the numerator per set bit of the
// reciprocal, summed by an adder) and rounds away RCP_W bits. The result is
// a DBFP block: out_mant[i] * 2^out_exp approximates num[i] / sum, with
// out_exp = -es shared by all lanes.
//
// From the paper: LUT plus shift-addition division completed in a single
// cycle, one exponent subtraction and lookup per 64 divisions, 10-bit
// integer operations, and the exponent subtraction / mantissa comp. LUT /
// mantissa shifter / adder / normalization blocks of Fig. 4(c). The table
// formula, the widths and the rounding are this design's choices.
//
// Table: rcp[j] = round(2^(RCP_W+RCP_IDX_W+1) / (2^(RCP_IDX_W+1) + 2j + 1)),
// the reciprocal of the midpoint of mantissa interval j.
//
// Interface: combinational; the output vector buffer registers it.
module dbfp_div
  import dbfp_pkg::*;
#(
  parameter int unsigned N         = 1024,
  parameter int unsigned SUM_W     = 21,
  parameter int unsigned DIV_GROUP = 64
) (
  input  lut_val_t                 num      [N],
  input  logic [SUM_W-1:0]         sum,
  output logic [OUT_W-1:0]         out_mant [N],
  output logic signed [OEXP_W-1:0] out_exp
);

  localparam int unsigned RCP_N  = 1 << RCP_IDX_W;
  localparam int unsigned GROUPS = (N + DIV_GROUP - 1) / DIV_GROUP;
  localparam int unsigned ESW    = $clog2(SUM_W);
  localparam int unsigned PW     = VAL_W + RCP_W;

  typedef logic [RCP_W-1:0] rcp_tab_t [RCP_N];

  function automatic rcp_tab_t make_rcp_tab();
    rcp_tab_t t;
    for (int j = 0; j < RCP_N; j++) begin
      longint unsigned a, b;
      a = longint'(1) << (RCP_W + RCP_IDX_W + 1);
      b = (longint'(1) << (RCP_IDX_W + 1)) + 2 * j + 1;
      t[j] = RCP_W'((2 * a + b) / (2 * b));
    end
    return t;
  endfunction

  localparam rcp_tab_t RCP_TAB = make_rcp_tab();

  logic [RCP_W-1:0] rcp [GROUPS];
  logic [ESW-1:0]   es  [GROUPS];

  // Per group: normalise the divisor and look up its reciprocal mantissa.
  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    always_comb begin
      logic [SUM_W+RCP_IDX_W-1:0] norm;
      es[g] = '0;
      for (int b = 0; b < SUM_W; b++) if (sum[b]) es[g] = ESW'(b);
      // Move the leading one to the top, keep the RCP_IDX_W bits below it.
      norm   = (SUM_W+RCP_IDX_W)'(sum) << (SUM_W - 1 - int'(es[g]) + RCP_IDX_W);
      rcp[g] = RCP_TAB[norm[SUM_W+RCP_IDX_W-2 -: RCP_IDX_W]];
    end
  end

  // Per lane: shift-and-add multiply, round, saturate.
  for (genvar i = 0; i < N; i++) begin : g_lane
    always_comb begin
      logic [PW-1:0] acc;
      logic [PW-1:0] rnd;
      acc = '0;
      for (int b = 0; b < RCP_W; b++)
        if (rcp[i / DIV_GROUP][b]) acc += PW'(num[i]) << b;
      rnd = (acc + (PW'(1) << (RCP_W - 1))) >> RCP_W;
      out_mant[i] = (rnd > PW'((1 << OUT_W) - 1)) ? OUT_W'((1 << OUT_W) - 1)
                                                  : rnd[OUT_W-1:0];
    end
  end

  assign out_exp = -$signed(OEXP_W'(es[0]));

endmodule
