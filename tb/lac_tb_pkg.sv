// lac_tb_pkg -- reference arithmetic shared by the Laconic testbenches.
// naf_terms() counts the one-offsets of a 16-bit signed value in its
// non-adjacent signed-digit form by the textbook division algorithm, and
// rand_value() draws activations and weights with a mix of precisions and
// zeros, so tests see both short and long one-offset lists.
package lac_tb_pkg;

  function automatic int naf_terms(input logic [15:0] v);
    int x, n;
    x = int'($signed(v));
    n = 0;
    while (x != 0) begin
      if (x % 2 != 0) begin
        x = x - (2 - (((x % 4) + 4) % 4));
        n++;
      end
      x = x / 2;
    end
    return n;
  endfunction

  // Random value with a precision of `bits` (1..16) bits, zero with
  // probability 1/zero_one_in (0: never).
  function automatic logic [15:0] rand_value(input int bits, input int zero_one_in);
    logic [15:0] r;
    if (zero_one_in > 0 && ($urandom % zero_one_in) == 0) return 16'd0;
    r = 16'($urandom);
    if (bits < 16) begin
      r = r & ((16'd1 << bits) - 16'd1);
      if (r[bits-1]) r = r | ~((16'd1 << bits) - 16'd1);   // sign-extend
    end
    return r;
  endfunction

endpackage
