// tb_lac_top -- end-to-end test of the accelerator core at its default size
// (16 windows x 8 filters, 16 lanes per PE, 128 weights and 256 activations
// per set).  It runs a sequence of output groups of 1 to 4 sets each, with
// activation and weight precisions drawn like the per-layer precisions of
// common CNNs (5-10 bit activations, 7-13 bit weights), zero values, an
// all-zero set and a full-precision set.  It checks every output activation
// against a dot product computed here, the cycle count of every set while sets
// stream back to back (max(1, max t_a x t_w)), and the performance counters.
// Each mechanism of the design must occur at least once: multi-set
// accumulation, a change of group length, a set with no work (one cycle),
// lanes finishing before the slowest lane (imbalance), acceptance of a new
// set in the final cycle of the previous one, and an output stall.
module tb_lac_top;
  import lac_pkg::*;
  import lac_tb_pkg::*;

  localparam int W = 16, F = 8, ACC = ACC_W_DEF, NSETS = 96;

  logic clk = 0, rst_n = 0;
  logic [15:0] cfg_sets;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0][LANES-1:0][15:0] act;
  logic [F-1:0][LANES-1:0][15:0] wgt;
  logic [F-1:0][W-1:0][ACC-1:0]  out_data;
  logic [31:0] cnt_sets, cnt_busy, cnt_stall, cnt_groups;
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  lac_top dut (.*);

  logic [W-1:0][LANES-1:0][15:0] s_act [NSETS];
  logic [F-1:0][LANES-1:0][15:0] s_wgt [NSETS];
  int   s_T [NSETS], s_minp [NSETS], s_gsize [NSETS], acc_cyc [NSETS];
  longint grp [$];
  int   n_multi = 0, n_zero = 0, n_imbal = 0, n_b2b = 0, n_switch = 0;
  longint sum_T = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum [F][W];
    int k, g, ab, wb;
    foreach (sum[f, w]) sum[f][w] = 0;
    k = 0;
    while (k < NSETS) begin
      g = 1 + ($urandom % 4);
      if (k == 0) g = 3;
      if (k + g > NSETS) g = NSETS - k;
      if (g > 1) n_multi++;
      for (int j = 0; j < g; j++, k++) begin
        s_gsize[k] = (j == 0) ? g : 0;
        ab = 5 + ($urandom % 6); wb = 7 + ($urandom % 7);
        for (int w = 0; w < W; w++) for (int l = 0; l < LANES; l++)
          s_act[k][w][l] = (k == 4) ? 16'd0 : (k == 7) ? 16'h5555 : rand_value(ab, 2);
        for (int f = 0; f < F; f++) for (int l = 0; l < LANES; l++)
          s_wgt[k][f][l] = (k == 7) ? 16'hAAAB : rand_value(wb, 5);
        s_T[k] = 0; s_minp[k] = 1000;
        for (int f = 0; f < F; f++) for (int w = 0; w < W; w++) for (int l = 0; l < LANES; l++) begin
          int p;
          p = naf_terms(s_act[k][w][l]) * naf_terms(s_wgt[k][f][l]);
          if (p > s_T[k]) s_T[k] = p;
          if (p < s_minp[k]) s_minp[k] = p;
          sum[f][w] += longint'($signed(s_act[k][w][l])) * longint'($signed(s_wgt[k][f][l]));
        end
        if (s_T[k] == 0) n_zero++;
        if (s_minp[k] < s_T[k]) n_imbal++;
        if (s_T[k] < 1) s_T[k] = 1;
        sum_T += longint'(s_T[k]);
      end
      for (int f = 0; f < F; f++) for (int w = 0; w < W; w++) grp.push_back(sum[f][w]);
      foreach (sum[f, w]) sum[f][w] = 0;
    end
  end

  // input driver: sets stream back to back; cfg_sets changes at group starts
  int idx = 0;
  initial begin
    bit acc;
    in_valid = 0; act = '0; wgt = '0; cfg_sets = 16'd1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (idx < NSETS) begin
      @(negedge clk);
      in_valid = 1'b1;
      if (s_gsize[idx] != 0) begin
        if (idx > 0 && 16'(s_gsize[idx]) != cfg_sets) n_switch++;
        cfg_sets = 16'(s_gsize[idx]);
      end
      act = s_act[idx]; wgt = s_wgt[idx];
      #1;
      acc = in_valid && in_ready;
      if (acc) acc_cyc[idx] = cyc;
      @(posedge clk);
      if (acc) idx++;
    end
    @(negedge clk); in_valid = 0;
  end

  // output side: takes the first groups at once, later ones after a delay
  int ngroups = 0;
  initial begin
    out_ready = 0;
    forever begin
      @(negedge clk);
      out_ready = (ngroups < 3) ? 1'b1 : (($urandom % 100) == 0);
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
    repeat (8000) @(posedge clk);
    // set timing while the outputs are taken at once (first groups)
    for (int k = 0; k + 1 < NSETS; k++) begin
      if (k < 6) begin
        check(acc_cyc[k+1] - acc_cyc[k] == s_T[k],
              $sformatf("set %0d took %0d cycles, expected %0d", k, acc_cyc[k+1] - acc_cyc[k], s_T[k]));
      end
      if (acc_cyc[k+1] - acc_cyc[k] == s_T[k] && s_T[k] > 1) n_b2b++;
    end
    check(grp.size() == 0, "all groups delivered");
    check(cnt_sets == 32'(NSETS), "set counter");
    check(cnt_groups == 32'(ngroups), "group counter");
    check(longint'(cnt_busy) == sum_T, $sformatf("busy counter %0d, expected %0d", cnt_busy, sum_T));
    check(n_multi > 0,  "multi-set accumulation happened");
    check(n_switch > 0, "group length changed");
    check(n_zero > 0,   "set with no work happened");
    check(n_imbal > 0,  "lane imbalance happened");
    check(n_b2b > 0,    "back-to-back acceptance happened");
    check(cnt_stall > 0, "output stall happened");
    $display("sets=%0d groups=%0d busy=%0d stall=%0d multi=%0d switch=%0d zero=%0d imbalance=%0d back_to_back=%0d",
             cnt_sets, ngroups, cnt_busy, cnt_stall, n_multi, n_switch, n_zero, n_imbal, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
