// tb_lac_tile -- self-checking test of the tile at a reduced array size
// (3 filters x 2 windows, 16 lanes per PE as in the paper).
// Random sets are grouped into outputs of 1 to 3 sets.  Phase 1 streams sets
// back to back with the output always taken and checks that every set takes
// exactly max(1, max over all lanes of t_a x t_w) cycles.  Phase 2 adds input
// gaps and output back-pressure and checks that stalls occur.  Every output
// group is compared with dot products computed here.
module tb_lac_tile;
  import lac_pkg::*;
  import lac_tb_pkg::*;

  localparam int W = 2, F = 3, ACC = 48, NSETS = 400;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, out_valid, out_ready, advance, stall;
  logic [W-1:0][LANES-1:0][15:0] act;
  logic [F-1:0][LANES-1:0][15:0] wgt;
  logic [F-1:0][W-1:0][ACC-1:0]  out_data;
  int checks = 0, failures = 0, cyc = 0, stalls = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin cyc++; if (stall) stalls++; end

  lac_tile #(.WINDOWS(W), .FILTERS(F), .ACC_W(ACC)) dut (.*);

  // stimulus tables
  logic [W-1:0][LANES-1:0][15:0] s_act [NSETS];
  logic [F-1:0][LANES-1:0][15:0] s_wgt [NSETS];
  bit   s_last [NSETS];
  int   s_T [NSETS];
  longint grp [$];          // expected outputs, F*W per group, in order
  int   acc_cyc [NSETS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // build the sets and the expected results
  initial begin
    longint sum [F][W];
    int left, ab, wb;
    left = 0;
    foreach (sum[f, w]) sum[f][w] = 0;
    for (int k = 0; k < NSETS; k++) begin
      ab = 1 + ($urandom % 10); wb = 1 + ($urandom % 12);
      if (k % 37 == 5) begin ab = 16; wb = 16; end
      for (int w = 0; w < W; w++) for (int l = 0; l < LANES; l++)
        s_act[k][w][l] = (k % 29 == 3) ? 16'd0 : rand_value(ab, 3);
      for (int f = 0; f < F; f++) for (int l = 0; l < LANES; l++)
        s_wgt[k][f][l] = rand_value(wb, 4);
      s_T[k] = 1;
      for (int f = 0; f < F; f++) for (int w = 0; w < W; w++) for (int l = 0; l < LANES; l++) begin
        int p;
        p = naf_terms(s_act[k][w][l]) * naf_terms(s_wgt[k][f][l]);
        if (p > s_T[k]) s_T[k] = p;
        sum[f][w] += longint'($signed(s_act[k][w][l])) * longint'($signed(s_wgt[k][f][l]));
      end
      if (left == 0) left = 1 + ($urandom % 3);
      left--;
      s_last[k] = (left == 0) || (k == NSETS - 1);
      if (s_last[k]) begin
        for (int f = 0; f < F; f++) for (int w = 0; w < W; w++) grp.push_back(sum[f][w]);
        foreach (sum[f, w]) sum[f][w] = 0;
      end
    end
  end

  // input driver
  int idx = 0;
  initial begin
    bit acc;
    in_valid = 0; in_last = 0; act = '0; wgt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (idx < NSETS) begin
      @(negedge clk);
      in_valid = (idx < NSETS / 2) ? 1'b1 : (($urandom % 3) != 0);
      act = s_act[idx]; wgt = s_wgt[idx]; in_last = s_last[idx];
      #1;
      acc = in_valid && in_ready;
      if (acc) acc_cyc[idx] = cyc;
      @(posedge clk);
      if (acc) idx++;
    end
    @(negedge clk); in_valid = 0;
  end

  // output checker
  int ngroups = 0;
  initial begin
    out_ready = 1;
    forever begin
      @(negedge clk);
      out_ready = (idx < NSETS / 2) ? 1'b1 : (($urandom % 4) == 0);
      #1;
      if (out_valid && out_ready) begin
        for (int f = 0; f < F; f++) for (int w = 0; w < W; w++) begin
          longint e;
          e = grp.pop_front();
          check(longint'($signed(out_data[f][w])) == e, $sformatf("group %0d out[%0d][%0d]", ngroups, f, w));
        end
        ngroups++;
      end
    end
  end

  initial begin
    wait (idx == NSETS);
    repeat (600) @(posedge clk);
    // phase 1 timing: back-to-back sets, no back-pressure
    for (int k = 0; k + 1 < NSETS / 2; k++)
      check(acc_cyc[k+1] - acc_cyc[k] == s_T[k], $sformatf("set %0d took %0d cycles, expected %0d", k, acc_cyc[k+1] - acc_cyc[k], s_T[k]));
    check(grp.size() == 0, "all groups delivered");
    check(stalls > 0, "output back-pressure stalled the array");
    $display("groups=%0d stall_cycles=%0d", ngroups, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
