// lac_adder_tree -- the enhanced adder tree of the Laconic PE (steps 4' and 5').
//
// Input: the 32 signed 6-bit bucket counts N^0..N^31 of the PE histogram,
// where N^j counts the products equal to +-2^j.  Output: the signed partial
// sum  psum = sum_j N^j * 2^j  in 38 bits.
//
// Counts whose indices are equal modulo 6 never overlap once shifted, so they
// are merged by concatenation units into six groups
//   G0 = {N30,N24,N18,N12,N6,N0}   G1 = {N31,N25,N19,N13,N7,N1}   (36 bits)
//   G2 = {N26,N20,N14,N8,N2}  ...  G5 = {N29,N23,N17,N11,N5}      (30 bits)
// and the result is psum = sum_i (G_i << i), a six-input adder.  Group
// contents, group and shifted widths (36/36/30/30/30/30 and 36..35) and the
// 38-bit result follow the paper.
//
// Purely combinational.
module lac_adder_tree
  import lac_pkg::*;
(
  input  logic [NBUCKET-1:0][CNT_W-1:0] cnt,
  output logic signed [PSUM_W-1:0]      psum
);

  logic [35:0] g0, g1;
  logic [29:0] g2, g3, g4, g5;

  lac_concat_unit #(.NIN(6)) u_g0 (.cnt({cnt[30], cnt[24], cnt[18], cnt[12], cnt[6], cnt[0]}), .sum(g0));
  lac_concat_unit #(.NIN(6)) u_g1 (.cnt({cnt[31], cnt[25], cnt[19], cnt[13], cnt[7], cnt[1]}), .sum(g1));
  lac_concat_unit #(.NIN(5)) u_g2 (.cnt({cnt[26], cnt[20], cnt[14], cnt[8],  cnt[2]}), .sum(g2));
  lac_concat_unit #(.NIN(5)) u_g3 (.cnt({cnt[27], cnt[21], cnt[15], cnt[9],  cnt[3]}), .sum(g3));
  lac_concat_unit #(.NIN(5)) u_g4 (.cnt({cnt[28], cnt[22], cnt[16], cnt[10], cnt[4]}), .sum(g4));
  lac_concat_unit #(.NIN(5)) u_g5 (.cnt({cnt[29], cnt[23], cnt[17], cnt[11], cnt[5]}), .sum(g5));

  // Step 4'.2 alignment and step 5' six-input reduction, all signed.
  assign psum = PSUM_W'($signed(g0))
              + (PSUM_W'($signed(g1)) <<< 1)
              + (PSUM_W'($signed(g2)) <<< 2)
              + (PSUM_W'($signed(g3)) <<< 3)
              + (PSUM_W'($signed(g4)) <<< 4)
              + (PSUM_W'($signed(g5)) <<< 5);

endmodule
