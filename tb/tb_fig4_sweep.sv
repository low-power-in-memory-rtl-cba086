// tb_fig4_sweep: the single-synapse experiment. One device (BLb) of one
// synapse is set to 100 kOhm and its partner (BL) is stepped through four
// programming configurations; each is read 100 times through the macro
// with a 50 ns sense window (SENSE_CYCLES = 5 at 10 ns) and the fraction of
// converged reads (XOR = 1 at the end of the window, i.e. weight != 0) is
// printed. The BL values (10k, 30k, 120k, 300k) are this test's choice.
// With the sense amplifier model, t_sw = 40 ns + 0.5 ns/kOhm * min(R):
// only the 10 kOhm configuration (45 ns) converges within 50 ns. The
// expected result per configuration is recomputed here from that formula;
// the default model is deterministic, so each configuration is 0 % or
// 100 %. A second macro, whose sense amplifiers have a 20 % read-to-read
// spread of the switching time, is then read 100 times on a 20 kOhm /
// 100 kOhm pair (nominal 50 ns, exactly the window): it must converge in
// some reads and not in others, as reads near the boundary do on the chip.
module tb_fig4_sweep;
  import tnn_pkg::*;
  localparam int COLS = 32, W = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n;
  logic rd_start; logic [4:0] rd_row; logic rd_busy, rd_done;
  trit_t row_weights [COLS]; logic [COLS-1:0] row_xor;
  logic [4:0] rd_col; trit_t rd_out;
  trit_t x_in [COLS];
  logic nrn_acc, nrn_clear, nrn_fire;
  logic signed [W-1:0] nrn_thresh, nrn_sum; logic [W-1:0] nrn_delta;
  trit_t nrn_act; logic nrn_act_valid;
  logic prog_en; logic [4:0] prog_row, prog_col; logic [31:0] prog_r_bl, prog_r_blb;

  tnn_rram_macro #(.SENSE_CYCLES(5)) dut (.*);

  // Same macro with a spread of the PCSA switching time; only the read
  // path and the programming port are used.
  logic rd_busy2, rd_done2; trit_t row_weights2 [COLS]; logic [COLS-1:0] row_xor2;
  trit_t rd_out2; logic signed [W-1:0] nrn_sum2; trit_t nrn_act2; logic nrn_act_valid2;
  tnn_rram_macro #(.SENSE_CYCLES(5), .PCSA_SPREAD_PCT(20)) dut_spread (
    .clk, .rst_n, .rd_start, .rd_row, .rd_busy(rd_busy2), .rd_done(rd_done2),
    .row_weights(row_weights2), .row_xor(row_xor2), .rd_col, .rd_out(rd_out2),
    .x_in, .nrn_acc, .nrn_clear, .nrn_fire, .nrn_thresh, .nrn_delta,
    .nrn_sum(nrn_sum2), .nrn_act(nrn_act2), .nrn_act_valid(nrn_act_valid2),
    .prog_en, .prog_row, .prog_col, .prog_r_bl, .prog_r_blb);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned r_bl_cfg [4] = '{10_000, 30_000, 120_000, 300_000};
    rst_n = 0; rd_start = 0; rd_row = 0; rd_col = 3; nrn_acc = 0; nrn_clear = 0; nrn_fire = 0;
    nrn_thresh = 0; nrn_delta = 0; prog_en = 0; prog_row = 0; prog_col = 0; prog_r_bl = 0; prog_r_blb = 0;
    for (int c = 0; c < COLS; c++) x_in[c] = TRIT_ZERO;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      int conv, expect_conv;
      real t;
      @(negedge clk);
      prog_en = 1; prog_row = 5'd2; prog_col = 5'd3; prog_r_bl = r_bl_cfg[k]; prog_r_blb = 100_000;
      @(negedge clk);
      prog_en = 0;
      conv = 0;
      for (int n = 0; n < 100; n++) begin
        @(negedge clk); rd_start = 1; rd_row = 5'd2;
        @(negedge clk); rd_start = 0;
        while (!rd_done) @(negedge clk);
        if (rd_out != TRIT_ZERO) conv++;
      end
      t = 40.0 + 0.5 * real'((r_bl_cfg[k] < 100_000) ? r_bl_cfg[k] : 100_000) / 1000.0;
      expect_conv = (t < 50.0) ? 100 : 0;
      $display("configuration #%0d: R_BL=%0d R_BLb=100000 -> %0d %% converged in 50 ns (model t_sw %0.1f ns)",
               k + 1, r_bl_cfg[k], conv, t);
      checks++;
      if (conv != expect_conv) begin failures++; $display("FAIL configuration %0d", k + 1); end
      checks++;
      if (conv != 0 && rd_out != TRIT_POS) begin failures++; $display("FAIL sign"); end
    end
    begin
      int conv;
      @(negedge clk);
      prog_en = 1; prog_row = 5'd2; prog_col = 5'd3; prog_r_bl = 20_000; prog_r_blb = 100_000;
      @(negedge clk);
      prog_en = 0;
      conv = 0;
      for (int n = 0; n < 100; n++) begin
        @(negedge clk); rd_start = 1; rd_row = 5'd2;
        @(negedge clk); rd_start = 0;
        while (!rd_done2) @(negedge clk);
        if (rd_out2 != TRIT_ZERO) conv++;
        checks++;
        if (rd_out2 == TRIT_NEG) begin failures++; $display("FAIL sign error with spread"); end
      end
      $display("with 20 %% spread: R_BL=20000 R_BLb=100000 -> %0d %% converged in 50 ns", conv);
      checks++;
      if (conv < 10 || conv > 90) begin failures++; $display("FAIL boundary pair not mixed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
