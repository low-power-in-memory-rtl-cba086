// gxnor: gated XNOR gate, the multiplier of a ternary neural network.
//
// y = w * x for w, x in {-1, 0, +1}: 0 when either input is 0, +1 when both
// are non-zero with the same sign, -1 when the signs differ. For non-zero
// inputs it reduces to the XNOR of the sign bits used by binarized networks.
// The truth table is the paper's GXNOR table; the 2-bit encoding (tnn_pkg)
// and the treatment of the unused code 2'b10 as 0 are this design's choices.
// Purely combinational.
module gxnor
  import tnn_pkg::*;
(
  input  trit_t w,
  input  trit_t x,
  output trit_t y
);

  logic nz;      // both operands non-zero
  logic same;    // signs agree (bit 1 is the sign bit)

  always_comb begin
    nz   = (w[0] && x[0]);              // codes 01 and 11 have bit 0 set
    same = ~(w[1] ^ x[1]);              // XNOR of the sign bits
    if (!nz)       y = TRIT_ZERO;
    else if (same) y = TRIT_POS;
    else           y = TRIT_NEG;
  end

endmodule
