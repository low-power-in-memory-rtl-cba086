// tnn_pkg: types and helpers shared by the ternary in-memory synapse design.
//
// A ternary value ("trit") is one of +1, -1 and 0. It is carried on two bits
// in two's complement, so that sign extension of the code gives its integer
// value: 2'b01 = +1, 2'b11 = -1, 2'b00 = 0. The code 2'b10 is never produced
// and every consumer reads it as 0. The encoding is a choice of this design.
package tnn_pkg;

  typedef enum logic [1:0] {
    TRIT_ZERO = 2'b00,
    TRIT_POS  = 2'b01,
    TRIT_NEG  = 2'b11
  } trit_t;

  // Integer value of a trit: +1, -1 or 0 (the unused code reads as 0).
  function automatic logic signed [1:0] trit_value(trit_t t);
    case (t)
      TRIT_POS: return 2'sb01;
      TRIT_NEG: return 2'sb11;
      default:  return 2'sb00;
    endcase
  endfunction

  // Gated XNOR (product of two trits), truth table of the GXNOR gate:
  // 0 if either operand is 0, +1 if the signs agree, -1 if they differ.
  function automatic trit_t trit_mul(trit_t w, trit_t x);
    if (w == TRIT_ZERO || x == TRIT_ZERO || w == 2'b10 || x == 2'b10)
      return TRIT_ZERO;
    return (w == x) ? TRIT_POS : TRIT_NEG;
  endfunction

endpackage
