// column_decoder: output multiplexer of the synapse array.
//
// Selects the ternary weight read on column col_sel (out0..out31 in the
// array schematic) onto the single output 'out'. The paper names the block;
// the plain COLS:1 multiplexer, and carrying the decoded 2-bit weight rather
// than the raw sense amplifier output, are this design's choices. An
// out-of-range address reads 0. Purely combinational.
module column_decoder
  import tnn_pkg::*;
#(
  parameter int unsigned COLS = 32,
  localparam int unsigned AW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic [AW-1:0] col_sel,
  input  trit_t         col_in [COLS],
  output trit_t         out
);

  always_comb begin
    out = TRIT_ZERO;
    for (int c = 0; c < COLS; c++)
      if (col_sel == AW'(c)) out = col_in[c];
  end

endmodule
