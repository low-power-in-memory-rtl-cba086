// tb_fig5_scatter: the multi-pair experiment. 109 synapses of the array
// (cells 0..108 in row-major order) are each programmed 14 times with
// random resistance pairs, log-uniform from 5 kOhm to 1 MOhm on each
// device, and read with a 50 ns sense window. Each read is classified as
// +1 (converged, Q = 1), -1 (converged, Q = 0) or 0 (not converged) and
// compared with the value derived here from the resistances and the
// model's switching time t_sw = 40 ns + 0.5 ns/kOhm * min(R). The test also
// counts sign errors (a converged read whose sign disagrees with which
// device is lower), which the differential read must never produce, and
// prints the number of reads in each class.
module tb_fig5_scatter;
  import tnn_pkg::*;
  localparam int COLS = 32, W = 16, PAIRS = 109, PROGS = 14;
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
  int unsigned rbl [PAIRS], rblb [PAIRS];
  int n_pos = 0, n_neg = 0, n_zero = 0, n_sign_err = 0;

  tnn_rram_macro #(.SENSE_CYCLES(5)) dut (.*);

  always #5 clk = ~clk;

  function automatic int unsigned log_uniform();
    return int'(5_000.0 * $exp($ln(200.0) * real'($urandom_range(0, 1_000_000)) / 1.0e6));
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; rd_start = 0; rd_row = 0; rd_col = 0; nrn_acc = 0; nrn_clear = 0; nrn_fire = 0;
    nrn_thresh = 0; nrn_delta = 0; prog_en = 0; prog_row = 0; prog_col = 0; prog_r_bl = 0; prog_r_blb = 0;
    for (int c = 0; c < COLS; c++) x_in[c] = TRIT_ZERO;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < PROGS; p++) begin
      for (int i = 0; i < PAIRS; i++) begin
        rbl[i] = log_uniform(); rblb[i] = log_uniform();
        @(negedge clk);
        prog_en = 1; prog_row = 5'(i / COLS); prog_col = 5'(i % COLS);
        prog_r_bl = rbl[i]; prog_r_blb = rblb[i];
      end
      @(negedge clk);
      prog_en = 0;
      for (int r = 0; r * COLS < PAIRS; r++) begin
        @(negedge clk); rd_start = 1; rd_row = 5'(r);
        @(negedge clk); rd_start = 0;
        while (!rd_done) @(negedge clk);
        for (int c = 0; c < COLS && r * COLS + c < PAIRS; c++) begin
          int i, e;
          real t;
          i = r * COLS + c;
          t = 40.0 + 0.5 * real'((rbl[i] < rblb[i]) ? rbl[i] : rblb[i]) / 1000.0;
          e = (rbl[i] == rblb[i] || t >= 50.0) ? 0 : (rbl[i] < rblb[i]) ? 1 : -1;
          checks++;
          case (row_weights[c])
            TRIT_POS: begin n_pos++;  if (rbl[i] > rblb[i]) n_sign_err++; end
            TRIT_NEG: begin n_neg++;  if (rbl[i] < rblb[i]) n_sign_err++; end
            default:  n_zero++;
          endcase
          if ((row_weights[c] == TRIT_POS ? 1 : row_weights[c] == TRIT_NEG ? -1 : 0) != e) begin
            failures++;
            $display("FAIL pair %0d R_BL=%0d R_BLb=%0d read %b expected %0d", i, rbl[i], rblb[i], row_weights[c], e);
          end
        end
      end
    end
    $display("%0d reads: +1 %0d, -1 %0d, 0 %0d, sign errors %0d", PAIRS * PROGS, n_pos, n_neg, n_zero, n_sign_err);
    checks++;
    if (n_sign_err != 0) failures++;
    checks++;
    if (n_pos == 0 || n_neg == 0 || n_zero == 0) begin failures++; $display("FAIL a class never occurred"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
