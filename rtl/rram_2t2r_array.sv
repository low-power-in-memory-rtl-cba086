// rram_2t2r_array: behavioural model of the 2T2R resistive memory array
// (not synthesizable logic: the devices are analog resistors).
//
// Each synapse is a pair of hafnium-oxide RRAM devices, one between BL and
// the source line, one between BLb and the source line, each behind an
// access transistor gated by the row's word line. A weight is stored in the
// pair: LRS/HRS means +1, HRS/LRS means -1, HRS/HRS means 0 (LRS/LRS is not
// used). The model keeps every device's resistance in ohms. For each column
// it reports the resistance that the conducting rows (wl and sl both 1) put
// on BL and on BLb; several conducting rows add their conductances; with no
// row conducting the column reads open (all ones). Bit-line voltages are
// left to the sense amplifier model.
// The organisation (ROWS x COLS cells, WL/SL per row, BL/BLb per column)
// follows the paper's array schematic. The programming port is this model's
// own: the paper does not describe the programming circuits, so prog_en sets
// both devices of cell (prog_row, prog_col) to prog_r_bl / prog_r_blb at the
// rising clock edge. Unprogrammed devices start at R_INIT_OHM. Reads are
// combinational (zero delay).
module rram_2t2r_array #(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned R_INIT_OHM = 1_000_000,
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CAW = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic            clk,
  input  logic [ROWS-1:0] wl,
  input  logic [ROWS-1:0] sl,
  input  logic            prog_en,
  input  logic [RAW-1:0]  prog_row,
  input  logic [CAW-1:0]  prog_col,
  input  logic [31:0]     prog_r_bl,
  input  logic [31:0]     prog_r_blb,
  output logic [31:0]     bl_r  [COLS],
  output logic [31:0]     blb_r [COLS]
);

  localparam logic [31:0] R_OPEN = 32'hFFFF_FFFF;

  logic [31:0] r_bl  [ROWS][COLS];
  logic [31:0] r_blb [ROWS][COLS];

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        r_bl[r][c]  = R_INIT_OHM;
        r_blb[r][c] = R_INIT_OHM;
      end
  end

  always @(posedge clk) begin
    if (prog_en) begin
      r_bl[prog_row][prog_col]  <= prog_r_bl;
      r_blb[prog_row][prog_col] <= prog_r_blb;
    end
  end

  // Parallel combination of the devices of the conducting rows.
  function automatic logic [31:0] parallel_r(real g);
    real r;
    if (g <= 0.0) return R_OPEN;
    r = 1.0 / g;
    if (r >= 4.0e9) return R_OPEN;
    return 32'($rtoi(r + 0.5));
  endfunction

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      real g_bl, g_blb;
      g_bl  = 0.0;
      g_blb = 0.0;
      for (int r = 0; r < ROWS; r++) begin
        if (wl[r] && sl[r]) begin
          if (r_bl[r][c]  != 0) g_bl  = g_bl  + 1.0 / real'(r_bl[r][c]);
          else                  g_bl  = g_bl  + 1.0e9;
          if (r_blb[r][c] != 0) g_blb = g_blb + 1.0 / real'(r_blb[r][c]);
          else                  g_blb = g_blb + 1.0e9;
        end
      end
      bl_r[c]  = parallel_r(g_bl);
      blb_r[c] = parallel_r(g_blb);
    end
  end

endmodule
