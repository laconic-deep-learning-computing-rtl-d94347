// tb_lac_conv_layers -- runs convolution-layer slices through the core at its
// default size (16 windows x 8 filters) and checks every output activation.
//
// For each network profile a c x y x x input activation block and 8 filters
// of c x 3 x 3 weights are generated with that network's activation and weight
// precision (first convolutional layer of each network's per-layer profile)
// and, for the pruned networks, mostly zero weights.  The 16 windows of one
// output row (stride 1) form the tile's 16 columns; each window's c*3*3
// activations, taken in (ky, kx, channel) order, are cut into sets of 16
// lanes, so one output group is ceil(c*9/16) sets.  The outputs are compared
// with a direct convolution computed here, and the cycle count is printed
// next to the cycles a 16-lane x 8-filter bit-parallel engine would need for
// the same outputs (one window, 16 products per filter per cycle).
module tb_lac_conv_layers;
  import lac_pkg::*;
  import lac_tb_pkg::*;

  localparam int W = 16, F = 8, ACC = ACC_W_DEF;
  localparam int C = 32, KH = 3, KW = 3, XW = W + KW - 1;
  localparam int VOL = C * KH * KW;
  localparam int SETS = (VOL + LANES - 1) / LANES;
  localparam int NNET = 6;

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

  // network profiles: first-layer activation precision, weight precision,
  // weight zero rate (1 in N kept for the pruned networks, 0 = dense)
  string net_name [NNET] = '{"AlexNet", "GoogLeNet", "VGG_S", "VGG_M", "AlexNet-Sparse", "ResNet50-Sparse"};
  int    a_prec   [NNET] = '{9, 10, 7, 7, 8, 10};
  int    w_prec   [NNET] = '{11, 11, 12, 12, 7, 13};
  int    w_keep   [NNET] = '{0, 0, 0, 0, 3, 3};

  logic [15:0] ia [KH][XW][C];          // input rows [ky][x][c]
  logic [15:0] fw [F][KH][KW][C];       // filters

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 1; act = '0; wgt = '0; cfg_sets = 16'(SETS);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NNET; n++) begin
      int t0, base_cycles;
      longint expect_v [F][W];
      // data, with about half of the activations zero (post-ReLU)
      foreach (ia[ky, x, c]) ia[ky][x][c] = rand_value(a_prec[n] - 1, 2) & 16'h7FFF;
      foreach (fw[f, ky, kx, c]) begin
        fw[f][ky][kx][c] = rand_value(w_prec[n], 0);
        if (w_keep[n] > 0 && ($urandom % w_keep[n]) != 0) fw[f][ky][kx][c] = 16'd0;
      end
      foreach (expect_v[f, w]) begin
        expect_v[f][w] = 0;
        for (int ky = 0; ky < KH; ky++) for (int kx = 0; kx < KW; kx++) for (int c = 0; c < C; c++)
          expect_v[f][w] += longint'($signed(ia[ky][w + kx][c])) * longint'($signed(fw[f][ky][kx][c]));
      end
      t0 = cyc;
      // stream the sets of this output group
      for (int s = 0; s < SETS; s++) begin
        for (int l = 0; l < LANES; l++) begin
          int e, ky, kx, c;
          e = s * LANES + l;
          ky = (e / C) / KW; kx = (e / C) % KW; c = e % C;
          for (int w = 0; w < W; w++) act[w][l] = (e < VOL) ? ia[ky][w + kx][c] : 16'd0;
          for (int f = 0; f < F; f++) wgt[f][l] = (e < VOL) ? fw[f][ky][kx][c] : 16'd0;
        end
        @(negedge clk);
        in_valid = 1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        #1;
      end
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      #1;
      foreach (expect_v[f, w])
        check(longint'($signed(out_data[f][w])) == expect_v[f][w], $sformatf("%s out[%0d][%0d]", net_name[n], f, w));
      // bit-parallel reference engine: 16 products per filter per cycle, one window at a time
      base_cycles = SETS * W;
      $display("%-16s a_prec=%0d w_prec=%0d: %0d cycles for 16 windows x 8 filters (bit-parallel 16x8 engine: %0d cycles)",
               net_name[n], a_prec[n], w_prec[n], cyc - t0, base_cycles);
      @(negedge clk);
    end
    check(cnt_groups == 32'(NNET - 1) || cnt_groups == 32'(NNET), "group counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
