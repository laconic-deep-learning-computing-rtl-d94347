// lac_tile -- Laconic tile: a FILTERS x WINDOWS array of PEs.
//
// Each set consists of WINDOWS windows of 16 activations (one activation
// column per window) and FILTERS filters of 16 weights (one weight row per
// filter).  PE (f, w) multiplies the 16 activations of window w by the 16
// weights of filter f: PEs in a column share activations and PEs in a row
// share weights, as in the paper's tile (16 windows x K = 8 filters).
//
// On acceptance every activation and weight is converted to its one-offsets
// (lac_term_encoder, one per input value) and every lane of every PE gets a
// pair sequencer (lac_term_sequencer) that feeds the PE one one-offset pair
// per cycle.  A set therefore takes T = max over all lanes of t_a x t_w
// cycles (at least one cycle), and the tile starts the next set only when all
// PEs are finished, as the paper describes.  The next set is accepted in the
// cycle in which the current set's final pairs are processed, so there are
// no idle cycles between sets.
//
// Interface (this design's choice; the paper gives no handshake):
//   in_valid/in_ready  accept one set (act, wgt, in_last); in_last marks the
//                      final set of an output group.
//   out_valid/out_ready  the FILTERS x WINDOWS accumulated outputs of a
//                      finished group; held until taken.  If the previous
//                      group's outputs are still waiting when a group
//                      finishes, the whole array stalls on its final pairs.
//   advance, stall     per-cycle status for performance counters.
// Timing: a set accepted at edge k has its pairs processed at edges
// k+1 .. k+T; the group's outputs are valid from edge k+T onward.
module lac_tile
  import lac_pkg::*;
#(
  parameter int unsigned WINDOWS    = 16,
  parameter int unsigned FILTERS    = 8,
  parameter int unsigned ACC_W      = ACC_W_DEF,
  parameter bit          POSITIONAL = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                                        in_valid,
  output logic                                        in_ready,
  input  logic                                        in_last,
  input  logic [WINDOWS-1:0][LANES-1:0][VAL_W-1:0]    act,
  input  logic [FILTERS-1:0][LANES-1:0][VAL_W-1:0]    wgt,
  output logic                                        out_valid,
  input  logic                                        out_ready,
  output logic [FILTERS-1:0][WINDOWS-1:0][ACC_W-1:0]  out_data,
  output logic                                        advance,
  output logic                                        stall
);

  // ---- one-offset encoders at the tile inputs
  digits_t [WINDOWS-1:0][LANES-1:0] a_dig;
  digits_t [FILTERS-1:0][LANES-1:0] w_dig;

  for (genvar w = 0; w < WINDOWS; w++) begin : g_aenc
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      lac_term_encoder #(.POSITIONAL(POSITIONAL)) u_enc (
        .value(act[w][l]), .digits(a_dig[w][l]), .nterms());
    end
  end
  for (genvar f = 0; f < FILTERS; f++) begin : g_wenc
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      lac_term_encoder #(.POSITIONAL(POSITIONAL)) u_enc (
        .value(wgt[f][l]), .digits(w_dig[f][l]), .nterms());
    end
  end

  // ---- control
  logic set_active;   // a set is loaded and not finished
  logic set_last;     // the loaded set ends an output group
  logic out_full;     // out_data holds a group not yet taken
  logic all_last;     // every lane is on its final pair (or has none)
  logic finishing;
  logic load;
  logic flush;

  logic [FILTERS-1:0][WINDOWS-1:0][LANES-1:0] lane_last;
  assign all_last = &lane_last;

  assign stall     = set_active && all_last && set_last && out_full && !out_ready;
  assign advance   = set_active && !stall;
  assign finishing = set_active && all_last && !stall;
  assign in_ready  = !set_active || finishing;
  assign load      = in_valid && in_ready;
  assign flush     = finishing && set_last;
  assign out_valid = out_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_active <= 1'b0;
      set_last   <= 1'b0;
      out_full   <= 1'b0;
    end else begin
      if (load) begin
        set_active <= 1'b1;
        set_last   <= in_last;
      end else if (finishing) begin
        set_active <= 1'b0;
      end
      if (flush)          out_full <= 1'b1;
      else if (out_ready) out_full <= 1'b0;
    end
  end

  // ---- PE array
  for (genvar f = 0; f < FILTERS; f++) begin : g_row
    for (genvar w = 0; w < WINDOWS; w++) begin : g_col
      term_t [LANES-1:0] a_t, w_t;
      for (genvar l = 0; l < LANES; l++) begin : g_lane
        lac_term_sequencer u_seq (
          .clk, .rst_n, .load,
          .a_digits(a_dig[w][l]), .w_digits(w_dig[f][l]),
          .advance,
          .a_term(a_t[l]), .w_term(w_t[l]), .last(lane_last[f][w][l]));
      end
      lac_pe #(.ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .a_term(a_t), .w_term(w_t),
        .en(advance), .flush,
        .psum(), .acc(), .result(out_data[f][w]));
    end
  end

  // ---- handshake rules
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> (!set_active || all_last));

endmodule
