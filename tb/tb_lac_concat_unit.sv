// tb_lac_concat_unit -- self-checking test of a concatenation unit.
// Random counts in [-16, 16] (and the extremes) are fed to a 6-input and a
// 5-input unit; the signed result must equal sum_k N_k * 2^(6k).
module tb_lac_concat_unit;
  import lac_pkg::*;

  logic [5:0][CNT_W-1:0] c6;
  logic [4:0][CNT_W-1:0] c5;
  logic [35:0] s6;
  logic [29:0] s5;
  int checks = 0, failures = 0;

  lac_concat_unit #(.NIN(6)) dut6 (.cnt(c6), .sum(s6));
  lac_concat_unit #(.NIN(5)) dut5 (.cnt(c5), .sum(s5));

  function automatic int rcnt(input int mode);
    if (mode == 0) return 16;
    if (mode == 1) return -16;
    return int'($urandom_range(32)) - 16;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      longint e6, e5;
      int v;
      e6 = 0; e5 = 0;
      for (int k = 0; k < 6; k++) begin
        v = rcnt((t < 2) ? t : ((t < 4) ? (k % 2) : 2));
        c6[k] = CNT_W'(v);
        e6 += longint'(v) <<< (6 * k);
      end
      for (int k = 0; k < 5; k++) begin
        v = rcnt(2);
        c5[k] = CNT_W'(v);
        e5 += longint'(v) <<< (6 * k);
      end
      #1;
      checks++; if (longint'($signed(s6)) != e6) begin failures++; if (failures < 10) $display("FAIL 6-input: got %0d want %0d", $signed(s6), e6); end
      checks++; if (longint'($signed(s5)) != e5) begin failures++; if (failures < 10) $display("FAIL 5-input: got %0d want %0d", $signed(s5), e5); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
