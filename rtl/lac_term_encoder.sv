// lac_term_encoder -- converts one 16-bit two's-complement activation or
// weight into its set of one-offsets (non-zero signed powers of two).
//
// With POSITIONAL = 0 (default) the value is recoded into the canonical
// signed-digit (non-adjacent) form, a Booth-style recoding with digits in
// {-1, 0, +1} and no two adjacent non-zero digits.  The paper processes
// "the non-zero signed powers of two in a Booth-encoded representation" and
// gives the examples -2 -> (-,1) and 7 -> ((+,3),(-,0)), which this form
// reproduces; the exact Booth variant is not stated, so the minimal one is
// used here.  The recoding is a ripple over the 16 bit positions with a carry:
//   b = x[i] + carry;  b == 1 -> digit -1 and carry 1 if x[i+1] is 1,
//                              else digit +1 and carry 0;
//   b == 0 -> digit 0, carry 0;  b == 2 -> digit 0, carry 1.
// For every 16-bit signed value all digits fall in positions 0..15, so a
// magnitude always fits the 4 bits the paper allots to a one-offset.
//
// With POSITIONAL = 1 the plain two's-complement bits are used instead (bit
// 15 is the one-offset -2^15), the "regular positional representation" the
// paper says the design can also process.
//
// Purely combinational: digits and nterms follow value in the same cycle.
module lac_term_encoder
  import lac_pkg::*;
#(
  parameter bit POSITIONAL = 1'b0
) (
  input  logic [VAL_W-1:0] value,
  output digits_t          digits,
  output logic [4:0]       nterms
);

  always_comb begin
    logic carry;
    logic b1, b2, nxt;
    digits.nz  = '0;
    digits.neg = '0;
    if (POSITIONAL) begin
      digits.nz         = value;
      digits.neg[VAL_W-1] = value[VAL_W-1];
    end else begin
      carry = 1'b0;
      for (int i = 0; i < VAL_W; i++) begin
        nxt = (i == VAL_W - 1) ? value[VAL_W-1] : value[(i+1) % VAL_W];
        b1  = value[i] ^ carry;   // b == 1
        b2  = value[i] & carry;   // b == 2
        if (b1) begin
          digits.nz[i]  = 1'b1;
          digits.neg[i] = nxt;
          carry         = nxt;
        end else begin
          carry = b2;
        end
      end
    end
    nterms = '0;
    for (int i = 0; i < VAL_W; i++) nterms = nterms + 5'(digits.nz[i]);
  end

endmodule
