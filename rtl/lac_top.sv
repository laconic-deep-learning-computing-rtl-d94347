// lac_top -- Laconic accelerator core: one tile with its set sequencing and
// performance counters.
//
// The tile (lac_tile) does the work: it multiplies WINDOWS windows of 16
// activations by FILTERS filters of 16 weights one one-offset pair per lane
// per cycle.  This wrapper turns a stream of sets coming from the activation
// and weight memories into output groups: every cfg_sets consecutive sets are
// accumulated into one group of FILTERS x WINDOWS output activations (for a
// convolution, cfg_sets = ceil(c*h*k / 16) sets make one output per window
// and filter).  It also counts accepted sets, busy cycles (cycles in which
// the PEs process pairs), stall cycles (the array held because the previous
// outputs were not taken) and finished groups.
//
// The activation memory, weight memory and the input/output activation
// buffers are outside this module: their data and handshakes are its ports.
// The default of 8 filters is the paper's tile with a 128-wire weight
// interface (one wire per weight); FILTERS = 16, 32 or 64 give the paper's
// 256-, 512- and 1K-wire configurations.  The activation interface carries
// 16 windows x 16 activations = 256 values in all of them.
//
// Timing: as lac_tile; the group counter adds no latency.  cfg_sets must be
// at least 1 and is sampled at each set acceptance.
module lac_top
  import lac_pkg::*;
#(
  parameter int unsigned WINDOWS    = 16,
  parameter int unsigned FILTERS    = 8,
  parameter int unsigned ACC_W      = ACC_W_DEF,
  parameter bit          POSITIONAL = 1'b0,
  parameter int unsigned CNT_BITS   = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [15:0]                                 cfg_sets,
  // activation / weight memory side
  input  logic                                        in_valid,
  output logic                                        in_ready,
  input  logic [WINDOWS-1:0][LANES-1:0][VAL_W-1:0]    act,
  input  logic [FILTERS-1:0][LANES-1:0][VAL_W-1:0]    wgt,
  // output activation buffer side
  output logic                                        out_valid,
  input  logic                                        out_ready,
  output logic [FILTERS-1:0][WINDOWS-1:0][ACC_W-1:0]  out_data,
  // performance counters
  output logic [CNT_BITS-1:0]                         cnt_sets,
  output logic [CNT_BITS-1:0]                         cnt_busy,
  output logic [CNT_BITS-1:0]                         cnt_stall,
  output logic [CNT_BITS-1:0]                         cnt_groups
);

  logic [15:0] set_idx;
  logic        in_last, accept, advance, stall;

  assign in_last = (set_idx + 16'd1 >= cfg_sets);
  assign accept  = in_valid && in_ready;

  lac_tile #(
    .WINDOWS(WINDOWS), .FILTERS(FILTERS), .ACC_W(ACC_W), .POSITIONAL(POSITIONAL)
  ) u_tile (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_last, .act, .wgt,
    .out_valid, .out_ready, .out_data,
    .advance, .stall);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_idx    <= '0;
      cnt_sets   <= '0;
      cnt_busy   <= '0;
      cnt_stall  <= '0;
      cnt_groups <= '0;
    end else begin
      if (accept) begin
        set_idx  <= in_last ? 16'd0 : set_idx + 16'd1;
        cnt_sets <= cnt_sets + 1'b1;
      end
      if (advance)              cnt_busy   <= cnt_busy + 1'b1;
      if (stall)                cnt_stall  <= cnt_stall + 1'b1;
      if (out_valid && out_ready) cnt_groups <= cnt_groups + 1'b1;
    end
  end

endmodule
