// lac_pkg -- shared constants, types and helper functions of the Laconic
// term-serial deep-learning accelerator.
//
// Values (activations and weights) are 16-bit two's-complement fixed point.
// Each value is re-encoded as a set of "one-offsets": signed powers of two
// (-1)^s * 2^t with t in 0..15, so a one-offset magnitude needs 4 bits and the
// exponent of a product of two one-offsets needs 5 bits (0..30).  A PE adds 16
// such products per cycle, which are counted in 32 power-of-two buckets; a
// bucket count lies in [-16, 16] and is kept in 6-bit two's complement.  The
// enhanced adder tree reduces the 32 counts into a 38-bit partial sum.  All of
// these widths follow the paper; the accumulator width is this design's choice.
package lac_pkg;

  localparam int unsigned VAL_W    = 16;  // activation / weight width
  localparam int unsigned MAG_W    = 4;   // one-offset magnitude (exponent) width
  localparam int unsigned EXP_W    = 5;   // product exponent width
  localparam int unsigned NBUCKET  = 32;  // powers of two 2^0 .. 2^31
  localparam int unsigned CNT_W    = 6;   // signed bucket count width
  localparam int unsigned PSUM_W   = 38;  // partial sum out of the enhanced adder tree
  localparam int unsigned LANES    = 16;  // products per PE per cycle
  localparam int unsigned ACC_W_DEF = 48; // default accumulator width (design choice)

  // One one-offset as it travels to a PE: a valid flag, the sign (1 = minus)
  // and the 4-bit magnitude t of the power of two 2^t.
  typedef struct packed {
    logic             valid;
    logic             sign;
    logic [MAG_W-1:0] mag;
  } term_t;

  // The complete one-offset set of one value: nz[i] = 1 when the signed
  // digit of weight 2^i is non-zero, neg[i] gives its sign.
  typedef struct packed {
    logic [VAL_W-1:0] nz;
    logic [VAL_W-1:0] neg;
  } digits_t;

  // Index of the least significant set bit of a 16-bit mask (0 when empty).
  function automatic logic [MAG_W-1:0] lowest_set(input logic [VAL_W-1:0] m);
    logic [MAG_W-1:0] idx;
    idx = '0;
    for (int i = VAL_W - 1; i >= 0; i--) begin
      if (m[i]) idx = MAG_W'(i);
    end
    return idx;
  endfunction

  // Value represented by a one-offset set (used by checks and testbenches).
  function automatic longint digits_value(input digits_t d);
    longint v;
    v = 0;
    for (int i = 0; i < VAL_W; i++) begin
      if (d.nz[i]) v = d.neg[i] ? v - (longint'(1) << i) : v + (longint'(1) << i);
    end
    return v;
  endfunction

endpackage
