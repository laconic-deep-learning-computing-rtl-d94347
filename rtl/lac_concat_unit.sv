// lac_concat_unit -- one concatenation unit of the enhanced adder tree.
//
// It adds NIN signed 6-bit bucket counts whose weights are 2^0, 2^6, 2^12,
// ... (relative to the group's lowest bucket) without any carry-propagate
// addition.  Because a count of 6 bits shifted by 6 cannot overlap a 6-bit
// count, (N_hi << n) + L, with L an n-bit signed lower part, equals the
// concatenation {N_hi - sign(L), L}: the upper count is decremented by one
// when the lower part is negative.  Applied as a chain, lowest count first
// (N^0 with N^6, the result with N^12, and so on), this gives a
// 6*NIN-bit two's-complement result.  The chain structure, the concatenation
// rule and the -1 correction follow the paper; a count lies in [-16,16], so
// N_hi - 1 never leaves the 6-bit range.
//
// Purely combinational.
module lac_concat_unit
  import lac_pkg::*;
#(
  parameter int unsigned NIN = 6
) (
  input  logic [NIN-1:0][CNT_W-1:0] cnt,   // cnt[k] has weight 2^(6k)
  output logic [NIN*CNT_W-1:0]      sum    // signed result
);

  always_comb begin
    sum = '0;
    sum[CNT_W-1:0] = cnt[0];
    for (int k = 1; k < NIN; k++) begin
      // sum[k*6-1] is the sign of the lower part built so far
      sum[k*CNT_W +: CNT_W] = cnt[k] - CNT_W'(sum[k*CNT_W-1]);
    end
  end

endmodule
