// tb_lac_worked_example -- the small worked example of the Laconic method:
// a 4 x 4 array of PEs, two activation/weight pairs per PE, 3-bit values in
// positional one-offset form (110 -> (2,1)).
//
// The activations of the four columns are (6,5) (1,6) (4,6) (2,3) and the
// weights of the four filters are (2,6) (7,2) (3,6) (1,5), lanes 0 and 1; all
// other lanes are zero.  The slowest pair is activation 6 = (2,1) with
// weight 7 = (2,1,0): 2 x 3 = 6 one-offset pairs, so the set must take 6
// cycles, against 16 cycles for the bit-parallel engine of the same example
// (a 2.67x speed-up).  The tile runs with POSITIONAL = 1; its outputs are
// checked against the 16 dot products computed here.  A second tile with the
// default signed-digit form runs the same set in parallel; it must give the
// same outputs in max(t_a x t_w) cycles of its own encoding (4 here, since
// 6 = 8-2 and 7 = 8-1 have two one-offsets each).
module tb_lac_worked_example;
  import lac_pkg::*;
  import lac_tb_pkg::*;

  localparam int W = 4, F = 4, ACC = 48;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_last, out_ready;
  logic in_ready_p, out_valid_p, advance_p, stall_p;
  logic in_ready_n, out_valid_n, advance_n, stall_n;
  logic [W-1:0][LANES-1:0][15:0] act;
  logic [F-1:0][LANES-1:0][15:0] wgt;
  logic [F-1:0][W-1:0][ACC-1:0]  out_p, out_n;
  int checks = 0, failures = 0;
  int busy_p = 0, busy_n = 0;

  always #5 clk = ~clk;
  // counted at the falling edge, where the combinational status is settled
  always @(negedge clk) begin
    if (advance_p) busy_p++;
    if (advance_n) busy_n++;
  end

  lac_tile #(.WINDOWS(W), .FILTERS(F), .ACC_W(ACC), .POSITIONAL(1'b1)) dut_pos (
    .clk, .rst_n, .in_valid, .in_ready(in_ready_p), .in_last, .act, .wgt,
    .out_valid(out_valid_p), .out_ready, .out_data(out_p), .advance(advance_p), .stall(stall_p));
  lac_tile #(.WINDOWS(W), .FILTERS(F), .ACC_W(ACC), .POSITIONAL(1'b0)) dut_naf (
    .clk, .rst_n, .in_valid, .in_ready(in_ready_n), .in_last, .act, .wgt,
    .out_valid(out_valid_n), .out_ready, .out_data(out_n), .advance(advance_n), .stall(stall_n));

  int a_ex [W][2] = '{'{6, 5}, '{1, 6}, '{4, 6}, '{2, 3}};
  int w_ex [F][2] = '{'{2, 6}, '{7, 2}, '{3, 6}, '{1, 5}};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_naf;
    act = '0; wgt = '0; in_valid = 0; in_last = 1; out_ready = 0;
    for (int w = 0; w < W; w++) for (int l = 0; l < 2; l++) act[w][l] = 16'(a_ex[w][l]);
    for (int f = 0; f < F; f++) for (int l = 0; l < 2; l++) wgt[f][l] = 16'(w_ex[f][l]);
    t_naf = 0;
    for (int w = 0; w < W; w++) for (int f = 0; f < F; f++) for (int l = 0; l < 2; l++)
      if (naf_terms(16'(a_ex[w][l])) * naf_terms(16'(w_ex[f][l])) > t_naf)
        t_naf = naf_terms(16'(a_ex[w][l])) * naf_terms(16'(w_ex[f][l]));
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in_valid = 1;
    #1;
    check(in_ready_p && in_ready_n, "idle tiles ready");
    @(negedge clk);
    in_valid = 0;
    repeat (12) @(negedge clk);
    check(busy_p == 6, $sformatf("positional set took %0d cycles, the example needs 6", busy_p));
    check(busy_n == t_naf, $sformatf("signed-digit set took %0d cycles, expected %0d", busy_n, t_naf));
    check(out_valid_p && out_valid_n, "outputs delivered");
    for (int f = 0; f < F; f++) for (int w = 0; w < W; w++) begin
      longint e;
      e = longint'(a_ex[w][0] * w_ex[f][0] + a_ex[w][1] * w_ex[f][1]);
      check(longint'($signed(out_p[f][w])) == e, $sformatf("positional out[%0d][%0d]", f, w));
      check(longint'($signed(out_n[f][w])) == e, $sformatf("signed-digit out[%0d][%0d]", f, w));
    end
    $display("worked example: %0d cycles (positional), %0d cycles (signed-digit), bit-parallel 16", busy_p, busy_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
