// row_decoder: drives the word line and the source line of one row of the
// 2T2R synapse array.
//
// The row address is decoded one-hot; the WL drive (wl_in) and SL drive
// (sl_in) are passed to the addressed row only, every other row is held at
// 0. In the chip these are analog drivers; here they are logic levels
// (wl = 1: access transistors on, sl = 1: source line grounded so the cell
// can discharge the bit lines). The block and its WL/SL inputs appear in the
// paper's array schematic; the one-hot gating is this design's choice.
// Purely combinational.
module row_decoder #(
  parameter int unsigned ROWS = 32,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic [AW-1:0]   row_addr,
  input  logic            wl_in,
  input  logic            sl_in,
  output logic [ROWS-1:0] wl,
  output logic [ROWS-1:0] sl
);

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      wl[r] = wl_in && (row_addr == AW'(r));
      sl[r] = sl_in && (row_addr == AW'(r));
    end
  end

endmodule
