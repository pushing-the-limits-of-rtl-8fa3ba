// hit_bitmap: hit table of the DH-LUT.
//
// For the vector in the Exp stage it records, for every table entry, how
// many lanes index it (hit_cnt) and whether any does (bitmap). Each lane's
// index is decoded to a one-hot row and the rows are added column by
// column, so all N lookups are recorded in parallel in one cycle. The adder
// tree later multiplies hit_cnt with the value table to form the Softmax
// denominator without N separate table reads.
//
// The paper describes "a hit bitmap table recording mantissa occurrences",
// each lookup "setting a corresponding bitmap bit" (Fig. 4(a) shows single
// 0/1 bits). A single bit cannot tell how many lanes share an entry, which
// the denominator sum needs, so this block keeps a count per entry and
// derives the paper's bitmap from it (count != 0); that widening is this
// design's choice.
//
// Interface: combinational; en gates all hits (idle cycle records nothing).
module hit_bitmap
  import dbfp_pkg::*;
#(
  parameter int unsigned N  = 1024,
  localparam int unsigned CW = $clog2(N+1)
) (
  input  logic          en,
  input  lut_idx_t      q       [N],
  output logic [CW-1:0] hit_cnt [LUT_N],
  output logic [LUT_N-1:0] bitmap
);

  for (genvar e = 0; e < LUT_N; e++) begin : g_entry
    always_comb begin
      hit_cnt[e] = '0;
      for (int i = 0; i < N; i++)
        hit_cnt[e] += CW'(en && (q[i] == lut_idx_t'(e)));
      bitmap[e] = (hit_cnt[e] != '0);
    end
  end

endmodule
