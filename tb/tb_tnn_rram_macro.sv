// tb_tnn_rram_macro: end-to-end test of the ternary synapse macro at its
// default size (32 x 32 cells, 2 precharge + 7 sense cycles at 10 ns).
//
// 1. Every cell is programmed with a random ternary weight written as a
//    resistance pair: +1 = LRS/HRS, -1 = HRS/LRS, 0 = HRS/HRS, with LRS
//    drawn from 5-40 kOhm and HRS from 120-900 kOhm; a few cells get
//    "intermediate" pairs near the 60 kOhm read boundary.
// 2. Every row is read. The expected weight of each cell is derived here
//    from its resistances alone: a pair resolves in the 70 ns window when
//    40 ns + 0.5 ns/kOhm * min(R) is below 70 ns, and its sign is that of
//    R_BLb - R_BL. The read latency (10 cycles), the column decoder output
//    and the ignored start-while-busy are checked.
// 3. Each row is used as a 32-input neuron with random inputs, and rows
//    0-3 together as a 128-input neuron accumulated over four reads; sums
//    and activations are recomputed here.
// 4. A cell is reprogrammed from +1 to 0 and read again, and the live XOR
//    of two more cells (20k/350k and 320k/350k) is timed from SEN rising.
// Every mechanism (each weight value, intermediate pairs, busy start,
// multi-row accumulation, each activation value, reprogramming) is counted
// and must occur at least once.
module tb_tnn_rram_macro;
  import tnn_pkg::*;
  localparam int ROWS = 32, COLS = 32, W = 16;
  localparam int LATENCY = 2 + 7 + 1;
  localparam real WINDOW_NS = 70.0;

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

  int unsigned rbl [ROWS][COLS];
  int unsigned rblb [ROWS][COLS];
  int n_pos = 0, n_neg = 0, n_zero = 0, n_mid = 0, n_busy = 0, n_multi = 0;
  int n_apos = 0, n_aneg = 0, n_azero = 0, n_reprog = 0, n_xor = 0;

  tnn_rram_macro dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  function automatic int expected_weight(int unsigned a, int unsigned b);
    real t;
    int unsigned m;
    if (a == b) return 0;
    m = (a < b) ? a : b;
    t = 40.0 + 0.5 * real'(m) / 1000.0;
    if (t >= WINDOW_NS) return 0;
    return (a < b) ? 1 : -1;
  endfunction
  function automatic int tv(trit_t t);
    return (t == TRIT_POS) ? 1 : (t == TRIT_NEG) ? -1 : 0;
  endfunction
  function automatic trit_t rt();
    case ($urandom_range(2)) 0: return TRIT_ZERO; 1: return TRIT_POS; default: return TRIT_NEG; endcase
  endfunction

  task automatic program_cell(int r, int c, int unsigned a, int unsigned b);
    @(negedge clk);
    prog_en = 1; prog_row = 5'(r); prog_col = 5'(c); prog_r_bl = a; prog_r_blb = b;
    rbl[r][c] = a; rblb[r][c] = b;
    @(negedge clk);
    prog_en = 0;
  endtask

  // Read one row and check latency and every weight.
  task automatic read_row(int r, bit acc, bit poke_busy);
    int lat;
    @(negedge clk);
    rd_start = 1; rd_row = 5'(r); nrn_acc = acc;
    @(negedge clk);
    rd_start = 0; lat = 1;
    while (!rd_done) begin
      if (poke_busy && lat == 3) begin rd_start = 1; rd_row = 5'(r ^ 1); n_busy++; end
      else rd_start = 0;
      @(negedge clk);
      lat++;
      if (lat > 50) break;
    end
    rd_start = 0;
    check(lat == LATENCY, $sformatf("row %0d read latency %0d", r, lat));
    for (int c = 0; c < COLS; c++) begin
      int e;
      e = expected_weight(rbl[r][c], rblb[r][c]);
      check(tv(row_weights[c]) == e, $sformatf("row %0d col %0d (%0d/%0d): %0d expected %0d",
            r, c, rbl[r][c], rblb[r][c], tv(row_weights[c]), e));
    end
    @(negedge clk);
    nrn_acc = 0;
    check(!rd_busy, "not busy after done (start during busy ignored)");
  endtask

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

    // 1. program
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int unsigned lrs, hrs, hrs2;
        lrs  = $urandom_range(5_000, 40_000);
        hrs  = $urandom_range(120_000, 900_000);
        hrs2 = $urandom_range(120_000, 900_000);
        if (hrs2 == hrs) hrs2++;
        if ((r * COLS + c) % 97 == 5)        // intermediate pair near the boundary
          program_cell(r, c, $urandom_range(45_000, 75_000), hrs);
        else case ($urandom_range(2))
          0: program_cell(r, c, hrs, hrs2);
          1: program_cell(r, c, lrs, hrs);
          default: program_cell(r, c, hrs, lrs);
        endcase
      end

    // 2. read all rows, column decoder
    for (int r = 0; r < ROWS; r++) begin
      read_row(r, 0, r == 7);
      for (int c = 0; c < COLS; c++) begin
        int e;
        e = expected_weight(rbl[r][c], rblb[r][c]);
        case (e) 1: n_pos++; -1: n_neg++; default: n_zero++; endcase
        if ((r * COLS + c) % 97 == 5) n_mid++;
        rd_col = 5'(c);
        #1;
        check(tv(rd_out) == e, $sformatf("column decoder row %0d col %0d", r, c));
      end
    end

    // 3a. one neuron per row
    for (int r = 0; r < ROWS; r++) begin
      int s, expw;
      trit_t ea;
      s = 0;
      for (int c = 0; c < COLS; c++) begin
        x_in[c] = rt();
        s += expected_weight(rbl[r][c], rblb[r][c]) * tv(x_in[c]);
      end
      @(negedge clk); nrn_clear = 1; @(negedge clk); nrn_clear = 0;
      read_row(r, 1, 0);
      check(int'(nrn_sum) == s, $sformatf("neuron row %0d sum %0d expected %0d", r, nrn_sum, s));
      nrn_thresh = W'($urandom_range(0, 4) - 2);
      nrn_delta  = W'($urandom_range(0, 3));
      expw = s - int'(nrn_thresh);
      ea = (expw > int'(nrn_delta)) ? TRIT_POS : (expw < -int'(nrn_delta)) ? TRIT_NEG : TRIT_ZERO;
      @(negedge clk); nrn_fire = 1; @(negedge clk); nrn_fire = 0;
      check(nrn_act_valid && nrn_act == ea, $sformatf("neuron row %0d act %b expected %b", r, nrn_act, ea));
      case (ea) TRIT_POS: n_apos++; TRIT_NEG: n_aneg++; default: n_azero++; endcase
    end

    // 3b. a 128-input neuron over rows 0-3
    begin
      int s;
      s = 0;
      @(negedge clk); nrn_clear = 1; @(negedge clk); nrn_clear = 0;
      for (int r = 0; r < 4; r++) begin
        for (int c = 0; c < COLS; c++) begin
          x_in[c] = rt();
          s += expected_weight(rbl[r][c], rblb[r][c]) * tv(x_in[c]);
        end
        read_row(r, 1, 0);
        n_multi++;
      end
      check(int'(nrn_sum) == s, $sformatf("128-input neuron sum %0d expected %0d", nrn_sum, s));
      nrn_thresh = W'(s); nrn_delta = 0;      // s - T = 0 -> activation 0
      @(negedge clk); nrn_fire = 1; @(negedge clk); nrn_fire = 0;
      check(nrn_act_valid && nrn_act == TRIT_ZERO, "128-input neuron at threshold gives 0");
    end

    // 4. reprogram (+1 -> 0) and reread
    program_cell(9, 4, 10_000, 400_000);
    read_row(9, 0, 0);
    check(row_weights[4] == TRIT_POS, "cell (9,4) programmed to +1");
    // live XOR: a 20k/350k pair separates 50 ns after SEN rises, a
    // 320k/350k pair not within the 70 ns window
    program_cell(9, 5, 20_000, 350_000);
    program_cell(9, 6, 320_000, 350_000);
    begin
      realtime t_sen, t_xor;
      bit seen6;
      t_xor = 0; seen6 = 0;
      @(negedge clk); rd_start = 1; rd_row = 5'd9;
      @(negedge clk); rd_start = 0;
      wait (dut.sen);
      t_sen = $realtime;
      fork
        begin wait (row_xor[5]); t_xor = $realtime - t_sen; end
        begin while (!rd_done) begin @(negedge clk); if (row_xor[6]) seen6 = 1; end end
      join
      check(t_xor > 49.9 && t_xor < 50.1, $sformatf("XOR of the 20k/350k pair rose after %0.2f ns", t_xor));
      check(!seen6, "320k/350k pair never resolves in 70 ns");
      check(row_weights[5] == TRIT_POS && row_weights[6] == TRIT_ZERO, "Fig. 3 pairs read +1 and 0");
      n_xor++;
    end
    program_cell(9, 4, 300_000, 400_000);
    read_row(9, 0, 0);
    check(row_weights[4] == TRIT_ZERO, "cell (9,4) reprogrammed to 0");
    n_reprog++;

    $display("mechanisms: w+1=%0d w-1=%0d w0=%0d intermediate=%0d busy_start=%0d multirow=%0d act+1=%0d act-1=%0d act0=%0d reprogram=%0d",
             n_pos, n_neg, n_zero, n_mid, n_busy, n_multi, n_apos, n_aneg, n_azero, n_reprog);
    check(n_pos > 0,  "weight +1 read");
    check(n_neg > 0,  "weight -1 read");
    check(n_zero > 0, "weight 0 read");
    check(n_mid > 0,  "intermediate pair read");
    check(n_busy > 0, "start while busy");
    check(n_multi > 0, "multi-row accumulation");
    check(n_apos > 0 && n_aneg > 0 && n_azero > 0, "all activation values");
    check(n_reprog > 0, "reprogramming");
    check(n_xor > 0, "live XOR timing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
