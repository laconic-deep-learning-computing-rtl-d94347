// tb_lac_pe -- self-checking test of the processing element.
// Each cycle 16 random one-offset pairs (random valid flags, signs and
// magnitudes, plus all-maximum and all-minus corner vectors) are applied to a
// PE with the enhanced adder tree and to one with the plain tree.  The
// partial sum is checked against sum_i +-2^(t_i + t'_i) computed here, and
// the accumulator and the flushed result against a running 64-bit sum.
module tb_lac_pe;
  import lac_pkg::*;

  logic clk = 0, rst_n = 0;
  term_t [LANES-1:0] a_term, w_term;
  logic en, flush;
  logic signed [PSUM_W-1:0] psum_e, psum_n;
  logic signed [47:0] acc_e, res_e, acc_n, res_n;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lac_pe #(.NAIVE_TREE(1'b0)) dut_e (.clk, .rst_n, .a_term, .w_term, .en, .flush,
                                     .psum(psum_e), .acc(acc_e), .result(res_e));
  lac_pe #(.NAIVE_TREE(1'b1)) dut_n (.clk, .rst_n, .a_term, .w_term, .en, .flush,
                                     .psum(psum_n), .acc(acc_n), .result(res_n));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ref_acc, ref_res, ref_psum;
    a_term = '0; w_term = '0; en = 0; flush = 0;
    ref_acc = 0; ref_res = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      ref_psum = 0;
      for (int i = 0; i < LANES; i++) begin
        a_term[i].valid = (t < 3) ? 1'b1 : ($urandom % 5 != 0);
        w_term[i].valid = (t < 3) ? 1'b1 : ($urandom % 5 != 0);
        a_term[i].sign  = (t == 1) ? 1'b1 : (t < 3) ? 1'b0 : 1'($urandom);
        w_term[i].sign  = (t < 3) ? 1'b0 : 1'($urandom);
        a_term[i].mag   = (t < 2) ? 4'd15 : (t == 2) ? 4'(i) : 4'($urandom);
        w_term[i].mag   = (t < 2) ? 4'd15 : (t == 2) ? 4'(15 - i) : 4'($urandom);
        if (a_term[i].valid && w_term[i].valid) begin
          longint p;
          p = longint'(1) << (int'(a_term[i].mag) + int'(w_term[i].mag));
          ref_psum += (a_term[i].sign ^ w_term[i].sign) ? -p : p;
        end
      end
      en    = ($urandom % 8) != 0;
      flush = en && (($urandom % 16) == 0);
      #1;
      check(longint'(psum_e) == ref_psum, "enhanced psum");
      check(longint'(psum_n) == ref_psum, "plain psum");
      if (en) begin
        if (flush) begin ref_res = ref_acc + ref_psum; ref_acc = 0; end
        else ref_acc += ref_psum;
      end
      @(posedge clk); #1;
      check(longint'(acc_e) == ref_acc && longint'(acc_n) == ref_acc, "accumulator");
      check(longint'(res_e) == ref_res && longint'(res_n) == ref_res, "result");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
