// ternary_readout: turns the two outputs of a precharge sense amplifier into
// a ternary weight.
//
// The sense amplifier starts each read with Q = Qb = 1 and, if it resolves,
// ends with Q and Qb complementary. The XOR of Q and Qb therefore says
// whether it resolved. At the end of the sense window (the clock edge at
// which 'sample' is high) the weight is captured:
//   XOR = 1, Q = 1  ->  +1   (BL device in LRS, BLb in HRS)
//   XOR = 1, Q = 0  ->  -1   (BL in HRS, BLb in LRS)
//   XOR = 0         ->   0   (both in HRS: too slow to resolve)
// This rule, and the XOR gate, are the paper's. Holding the result in a
// flip-flop clocked by the read controller, and the reset value 0, are this
// design's choices. xor_o is the live, unregistered XOR.
// Timing: weight changes one clock edge after 'sample'; q and qb must be
// stable at that edge.
module ternary_readout
  import tnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  q,
  input  logic  qb,
  input  logic  sample,
  output logic  xor_o,
  output trit_t weight
);

  assign xor_o = q ^ qb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      weight <= TRIT_ZERO;
    else if (sample) begin
      if (!xor_o)  weight <= TRIT_ZERO;
      else if (q)  weight <= TRIT_POS;
      else         weight <= TRIT_NEG;
    end
  end

endmodule
