// lac_term_sequencer -- walks one activation/weight lane through every pair
// of one-offsets, one pair per cycle.
//
// A lane multiplies activation A (t_a one-offsets) by weight W (t_w
// one-offsets) as t_a x t_w single power-of-two products.  The sequencer
// keeps the remaining activation one-offsets, the full weight one-offset set
// and the remaining weight one-offsets.  Each advancing cycle it presents the
// lowest remaining activation one-offset with the lowest remaining weight
// one-offset, then removes that weight one-offset; when the weight set runs
// out it removes the activation one-offset and reloads the weight set.  A
// lane therefore needs exactly t_a x t_w cycles, independently of the other
// lanes, which is what lets a set finish after max(t_a x t_w) cycles as in the
// paper.  A value of zero has no one-offsets, so its lane has no work.  The
// pair order (least significant first, activation outer) is this design's
// choice; the paper fixes only that one pair is processed per cycle.
//
// Interface: `load` captures new digit sets (it wins over `advance`, so a new
// set may be loaded in the cycle that consumes the old set's final pair).
// `a_term`/`w_term` are the current pair (valid when the lane has work);
// `last` is high when the lane has no pair left after the current one, or
// no pair at all.  Outputs are driven from registers only.
module lac_term_sequencer
  import lac_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    load,
  input  digits_t a_digits,
  input  digits_t w_digits,
  input  logic    advance,
  output term_t   a_term,
  output term_t   w_term,
  output logic    last
);

  logic [VAL_W-1:0] a_rem, a_neg, w_full, w_neg, w_rem;
  logic             has_pair;
  logic [VAL_W-1:0] w_after, a_after;

  assign has_pair = (a_rem != '0) && (w_rem != '0);
  assign w_after  = w_rem & (w_rem - 1'b1);   // drop the lowest weight one-offset
  assign a_after  = a_rem & (a_rem - 1'b1);   // drop the lowest activation one-offset

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_rem  <= '0;
      a_neg  <= '0;
      w_full <= '0;
      w_neg  <= '0;
      w_rem  <= '0;
    end else if (load) begin
      a_rem  <= a_digits.nz;
      a_neg  <= a_digits.neg;
      w_full <= w_digits.nz;
      w_neg  <= w_digits.neg;
      w_rem  <= w_digits.nz;
    end else if (advance && has_pair) begin
      if (w_after != '0) begin
        w_rem <= w_after;
      end else begin
        a_rem <= a_after;
        w_rem <= (a_after != '0) ? w_full : '0;
      end
    end
  end

  always_comb begin
    logic [MAG_W-1:0] ai, wi;
    ai = lowest_set(a_rem);
    wi = lowest_set(w_rem);
    a_term.valid = has_pair;
    a_term.sign  = a_neg[ai];
    a_term.mag   = ai;
    w_term.valid = has_pair;
    w_term.sign  = w_neg[wi];
    w_term.mag   = wi;
    last = !has_pair || ((w_after == '0) && (a_after == '0));
  end

endmodule
