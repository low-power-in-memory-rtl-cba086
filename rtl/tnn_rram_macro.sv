// tnn_rram_macro: a 32 x 32 array of ternary synapses stored in 2T2R
// resistive memory, read by precharge sense amplifiers, with a ternary
// neuron on the row read.
//
// Each synapse is a pair of RRAM devices on the BL and BLb lines of its
// column. LRS/HRS stores +1, HRS/LRS stores -1 and HRS/HRS stores 0. A read
// selects one row through the row decoder and fires all COLS sense
// amplifiers together. An amplifier whose lower device is in LRS resolves
// inside the sense window (Q and Qb complementary, XOR = 1, Q gives the
// sign); an HRS/HRS pair is too slow to resolve, XOR stays 0, and the weight
// reads 0. So the same array and amplifier that store binary weights also
// store ternary ones; only the XOR and the end-of-window capture are added.
//
// Datapath: sense_controller -> row_decoder -> rram_2t2r_array (model) ->
// COLS x pcsa (model) -> COLS x ternary_readout -> row_weights, which feed
// the output column_decoder (rd_out, column rd_col) and the tnn_neuron.
//
// Interface and timing (10 ns clock assumed, so SENSE_CYCLES = 7 is the
// 70 ns window):
//   rd_start/rd_row   start a row read when rd_busy is low;
//   rd_done           pulses PRECHARGE_CYCLES + SENSE_CYCLES + 1 cycles after
//                     rd_start; row_weights then hold the row until the
//                     next read completes;
//   nrn_acc           if high on the rd_done cycle, the neuron adds
//                     sum_i GXNOR(row_weights[i], x_in[i]) to its sum;
//   nrn_clear, nrn_fire, nrn_thresh, nrn_delta: see tnn_neuron; nrn_act is
//                     valid (nrn_act_valid) one cycle after nrn_fire;
//   PCSA_SPREAD_PCT   optional read-to-read spread of the sense amplifier
//                     switching time (0: deterministic), see pcsa;
//   prog_*            behavioural programming of one cell per clock; the
//                     paper does not describe the programming circuits (the
//                     BL/BLb column decoder), so these come out as ports.
// What follows the paper: the array organisation, the PCSA read, the XOR
// ternary rule, the 70 ns window, GXNOR and the activation function. This
// design's own choices: clock, precharge length, handshakes, encodings and
// how the neuron is attached to the read.
module tnn_rram_macro
  import tnn_pkg::*;
#(
  parameter int unsigned ROWS             = 32,
  parameter int unsigned COLS             = 32,
  parameter int unsigned PRECHARGE_CYCLES = 2,
  parameter int unsigned SENSE_CYCLES     = 7,
  parameter int unsigned ACC_W            = 16,
  parameter int unsigned PCSA_SPREAD_PCT  = 0,
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CAW = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // row read
  input  logic                    rd_start,
  input  logic [RAW-1:0]          rd_row,
  output logic                    rd_busy,
  output logic                    rd_done,
  output trit_t                   row_weights [COLS],
  output logic [COLS-1:0]         row_xor,
  // single-weight output through the column decoder
  input  logic [CAW-1:0]          rd_col,
  output trit_t                   rd_out,
  // neuron
  input  trit_t                   x_in [COLS],
  input  logic                    nrn_acc,
  input  logic                    nrn_clear,
  input  logic                    nrn_fire,
  input  logic signed [ACC_W-1:0] nrn_thresh,
  input  logic        [ACC_W-1:0] nrn_delta,
  output logic signed [ACC_W-1:0] nrn_sum,
  output trit_t                   nrn_act,
  output logic                    nrn_act_valid,
  // programming (stands in for the BL/BLb column decoder)
  input  logic                    prog_en,
  input  logic [RAW-1:0]          prog_row,
  input  logic [CAW-1:0]          prog_col,
  input  logic [31:0]             prog_r_bl,
  input  logic [31:0]             prog_r_blb
);

  logic [RAW-1:0]  row_addr;
  logic            wl_drv, sl_drv, sen, sample;
  logic [ROWS-1:0] wl, sl;
  logic [31:0]     bl_r  [COLS];
  logic [31:0]     blb_r [COLS];
  logic [COLS-1:0] q, qb;

  sense_controller #(
    .ROWS(ROWS), .PRECHARGE_CYCLES(PRECHARGE_CYCLES), .SENSE_CYCLES(SENSE_CYCLES)
  ) u_ctrl (
    .clk, .rst_n,
    .start(rd_start), .row_addr_in(rd_row), .row_addr,
    .wl_drv, .sl_drv, .sen, .sample,
    .busy(rd_busy), .done(rd_done)
  );

  row_decoder #(.ROWS(ROWS)) u_rowdec (
    .row_addr, .wl_in(wl_drv), .sl_in(sl_drv), .wl, .sl
  );

  rram_2t2r_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .wl, .sl,
    .prog_en, .prog_row, .prog_col, .prog_r_bl, .prog_r_blb,
    .bl_r, .blb_r
  );

  for (genvar c = 0; c < COLS; c++) begin : g_col
    pcsa #(.SPREAD_PCT(PCSA_SPREAD_PCT)) u_pcsa (
      .sen, .r_bl(bl_r[c]), .r_blb(blb_r[c]), .q(q[c]), .qb(qb[c])
    );
    ternary_readout u_readout (
      .clk, .rst_n, .q(q[c]), .qb(qb[c]), .sample,
      .xor_o(row_xor[c]), .weight(row_weights[c])
    );
  end

  column_decoder #(.COLS(COLS)) u_coldec (
    .col_sel(rd_col), .col_in(row_weights), .out(rd_out)
  );

  tnn_neuron #(.N_IN(COLS), .ACC_W(ACC_W)) u_neuron (
    .clk, .rst_n,
    .clear(nrn_clear), .acc_en(nrn_acc && rd_done),
    .w(row_weights), .x(x_in),
    .fire(nrn_fire), .thresh(nrn_thresh), .delta(nrn_delta),
    .sum(nrn_sum), .act(nrn_act), .act_valid(nrn_act_valid)
  );

endmodule
