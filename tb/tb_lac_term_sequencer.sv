// tb_lac_term_sequencer -- self-checking test of the per-lane pair sequencer.
// Random activation/weight pairs are encoded, loaded and stepped with random
// stall cycles.  The test adds up the emitted signed powers of two and checks
// that they equal the integer product A*W, that exactly t_a*t_w pairs come
// out, that `last` flags the final pair, and that a new load in the cycle of
// the final pair is taken.
module tb_lac_term_sequencer;
  import lac_pkg::*;

  logic clk = 0, rst_n = 0;
  logic load, advance;
  logic [15:0] a_val, w_val;
  digits_t a_d, w_d;
  logic [4:0] a_n, w_n;
  term_t a_term, w_term;
  logic last;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lac_term_encoder enc_a (.value(a_val), .digits(a_d), .nterms(a_n));
  lac_term_encoder enc_w (.value(w_val), .digits(w_d), .nterms(w_n));
  lac_term_sequencer dut (.clk, .rst_n, .load, .a_digits(a_d), .w_digits(w_d),
                          .advance, .a_term, .w_term, .last);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s a=%0d w=%0d", what, $signed(a_val), $signed(w_val)); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum, expect_v;
    int pairs, expect_pairs;
    bit saw_last;
    load = 0; advance = 0; a_val = 0; w_val = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 1500; k++) begin
      // small-precision values half of the time, like real layers
      a_val = (k % 2) ? 16'($urandom) : 16'($signed(8'($urandom)));
      w_val = (k % 3 == 0) ? 16'($urandom) : 16'($signed(7'($urandom)));
      if (k % 50 == 0) a_val = 0;
      #1;
      expect_v = longint'($signed(a_val)) * longint'($signed(w_val));
      expect_pairs = $countones(a_d.nz) * $countones(w_d.nz);
      @(negedge clk); load = 1; advance = 0;
      @(negedge clk); load = 0;
      sum = 0; pairs = 0; saw_last = 0;
      while (!saw_last) begin
        advance = ($urandom % 4) != 0;
        #1;
        if (advance) begin
          if (a_term.valid) begin
            longint p;
            p = longint'(1) << (int'(a_term.mag) + int'(w_term.mag));
            sum += (a_term.sign ^ w_term.sign) ? -p : p;
            pairs++;
          end
          saw_last = last;
        end
        @(negedge clk);
        if (pairs > 300) break;
      end
      advance = 0;
      check(sum == expect_v, "product");
      check(pairs == expect_pairs, "pair count");
      #1; check(!a_term.valid, "empty after last");
    end
    // load in the cycle of the final pair: the new set must be taken
    a_val = 16'd3; w_val = 16'd1;   // 3 = 4 - 1 -> two pairs
    @(negedge clk); load = 1; @(negedge clk); load = 0; advance = 1;
    @(negedge clk); #1; check(last && a_term.valid, "last flagged");
    a_val = 16'd1; w_val = 16'd1; load = 1;
    @(negedge clk); load = 0; #1;
    check(a_term.valid && a_term.mag == 0 && w_term.mag == 0 && last, "back-to-back load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
