// tb_lac_term_encoder -- self-checking test of the one-offset encoder.
// For corner values and random values it checks, against an independent
// integer recoding done here, that the digits add back to the value, that no
// two adjacent digits are non-zero, and that the digit set and term count
// match the reference exactly.  The positional variant is checked too.
module tb_lac_term_encoder;
  import lac_pkg::*;

  logic [15:0] value;
  digits_t     d_naf, d_pos;
  logic [4:0]  n_naf, n_pos;
  int checks = 0, failures = 0;

  lac_term_encoder #(.POSITIONAL(1'b0)) dut_naf (.value(value), .digits(d_naf), .nterms(n_naf));
  lac_term_encoder #(.POSITIONAL(1'b1)) dut_pos (.value(value), .digits(d_pos), .nterms(n_pos));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s value=%0d", what, $signed(value));
    end
  endtask

  // Reference non-adjacent form by repeated division.
  task automatic ref_naf(input int v, output logic [15:0] nz, output logic [15:0] neg, output int n);
    int x, i, d;
    nz = '0; neg = '0; n = 0; x = v; i = 0;
    while (x != 0 && i < 20) begin
      if (x % 2 != 0) begin
        d = 2 - (((x % 4) + 4) % 4);
        x = x - d;
        if (i < 16) begin nz[i] = 1'b1; neg[i] = (d < 0); end
        else nz = 'x;  // would be out of range: never expected
        n++;
      end
      x = x / 2;
      i++;
    end
  endtask

  task automatic run_one(input logic [15:0] v);
    logic [15:0] rnz, rneg; int rn;
    value = v;
    #1;
    ref_naf(int'($signed(v)), rnz, rneg, rn);
    check(digits_value(d_naf) == longint'($signed(v)), "naf value");
    check((d_naf.nz & (d_naf.nz >> 1)) == 16'h0, "naf adjacency");
    check(d_naf.nz == rnz && (d_naf.neg & d_naf.nz) == rneg, "naf digits");
    check(int'(n_naf) == rn, "naf count");
    check(digits_value(d_pos) == longint'($signed(v)), "positional value");
    check(int'(n_pos) == $countones(v), "positional count");
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run_one(16'd0); run_one(16'd7); run_one(16'hFFFE); run_one(16'h7FFF);
    run_one(16'h8000); run_one(16'hFFFF); run_one(16'h5555); run_one(16'hAAAA);
    run_one(16'd1); run_one(16'h6000);
    // -2 is (-,1), 7 is ((+,3),(-,0)) as in the paper's examples
    value = 16'hFFFE; #1; check(d_naf.nz == 16'h0002 && d_naf.neg[1], "example -2");
    value = 16'd7;    #1; check(d_naf.nz == 16'h0009 && d_naf.neg[0] && !d_naf.neg[3], "example 7");
    for (int k = 0; k < 3000; k++) run_one(16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
