// tb_lac_adder_tree -- self-checking test of the enhanced adder tree.
// Random and extreme 32-bucket count vectors are reduced; the 38-bit result
// must equal sum_j N^j * 2^j computed here with 64-bit integers.
module tb_lac_adder_tree;
  import lac_pkg::*;

  logic [NBUCKET-1:0][CNT_W-1:0] cnt;
  logic signed [PSUM_W-1:0] psum;
  int checks = 0, failures = 0;

  lac_adder_tree dut (.cnt(cnt), .psum(psum));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      longint e;
      int v;
      e = 0;
      for (int j = 0; j < NBUCKET; j++) begin
        case (t)
          0: v = 16;
          1: v = -16;
          2: v = (j % 2) ? 16 : -16;
          3: v = (j == 30) ? 16 : 0;
          default: v = (($urandom % 3) == 0) ? 0 : int'($urandom_range(32)) - 16;
        endcase
        cnt[j] = CNT_W'(v);
        e += longint'(v) <<< j;
      end
      #1;
      checks++;
      if (longint'(psum) != e) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d want %0d", psum, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
