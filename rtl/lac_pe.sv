// lac_pe -- Laconic processing element: 16 one-offset products per cycle.
//
// Every cycle the PE receives 16 activation one-offsets and the 16 matching
// weight one-offsets (each a valid flag, a sign and a 4-bit magnitude) and
// adds the 16 signed powers of two they form to its accumulator:
//   step 1  exponent E_i = t_i + t'_i (5 bits) and sign s_i XOR s'_i;
//   step 2  a 5-to-32 decoder turns E_i into the one-hot value 2^E_i;
//   step 3  a histogram counts, for each power 2^j, the signed number of
//           products equal to +-2^j: 32 six-bit counts in [-16, 16];
//   step 4/5  the counts are weighted and reduced to a 38-bit partial sum,
//           by default with the enhanced (concatenating) adder tree, or with
//           the plain shift-and-add tree of 32 inputs when NAIVE_TREE = 1;
//   step 6  the partial sum is added to the accumulator.
// Steps 1-5 are one combinational stage here; the paper allows steps to be
// merged or split.  A lane whose valid flag is low adds nothing.
//
// Control (this design's choice): when `en` is high the partial sum is
// accumulated.  When `en` and `flush` are both high the completed output
// acc + psum is written to `result` and the accumulator restarts from zero,
// so the next output can start accumulating in the next cycle.
// The accumulator width ACC_W (default 48) is not given by the paper.  The MAX
// block drawn in the paper's accumulation stage is not built (see README).
module lac_pe
  import lac_pkg::*;
#(
  parameter int unsigned ACC_W      = ACC_W_DEF,
  parameter bit          NAIVE_TREE = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  term_t [LANES-1:0]       a_term,
  input  term_t [LANES-1:0]       w_term,
  input  logic                    en,
  input  logic                    flush,
  output logic signed [PSUM_W-1:0] psum,
  output logic signed [ACC_W-1:0]  acc,
  output logic signed [ACC_W-1:0]  result
);

  // Steps 1 and 2: exponents, signs, one-hot decode.
  logic [LANES-1:0][NBUCKET-1:0] onehot;
  logic [LANES-1:0]              psign;

  always_comb begin
    logic [EXP_W-1:0] e;
    for (int i = 0; i < LANES; i++) begin
      e         = EXP_W'(a_term[i].mag) + EXP_W'(w_term[i].mag);
      psign[i]  = a_term[i].sign ^ w_term[i].sign;
      onehot[i] = (a_term[i].valid && w_term[i].valid) ? (NBUCKET'(1) << e) : '0;
    end
  end

  // Step 3: histogram into 32 signed buckets.
  logic [NBUCKET-1:0][CNT_W-1:0] cnt;

  always_comb begin
    for (int j = 0; j < NBUCKET; j++) begin
      cnt[j] = '0;
      for (int i = 0; i < LANES; i++) begin
        if (onehot[i][j]) cnt[j] = psign[i] ? cnt[j] - 1'b1 : cnt[j] + 1'b1;
      end
    end
  end

  // Steps 4 and 5.
  if (NAIVE_TREE) begin : g_naive
    always_comb begin
      psum = '0;
      for (int j = 0; j < NBUCKET; j++)
        psum = psum + (PSUM_W'($signed(cnt[j])) <<< j);
    end
  end else begin : g_enhanced
    lac_adder_tree u_tree (.cnt(cnt), .psum(psum));
  end

  // Step 6: accumulation.
  logic signed [ACC_W-1:0] acc_sum;
  assign acc_sum = acc + ACC_W'(psum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      result <= '0;
    end else if (en) begin
      if (flush) begin
        result <= acc_sum;
        acc    <= '0;
      end else begin
        acc <= acc_sum;
      end
    end
  end

endmodule
