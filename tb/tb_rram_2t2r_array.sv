// tb_rram_2t2r_array: programs random resistances into random cells and
// checks what each column presents: open with no row selected, the cell's
// own resistances with one row selected (WL and SL both high), open when
// only WL or only SL is high, and the parallel value 1/(1/Ra+1/Rb) when two
// rows conduct.
module tb_rram_2t2r_array;
  localparam int ROWS = 32, COLS = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [ROWS-1:0] wl, sl;
  logic prog_en;
  logic [4:0] prog_row, prog_col;
  logic [31:0] prog_r_bl, prog_r_blb;
  logic [31:0] bl_r [COLS];
  logic [31:0] blb_r [COLS];
  int unsigned ref_bl [ROWS][COLS];
  int unsigned ref_blb [ROWS][COLS];

  rram_2t2r_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .wl, .sl, .prog_en,
    .prog_row, .prog_col, .prog_r_bl, .prog_r_blb, .bl_r, .blb_r);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = '0; sl = '0; prog_en = 0; prog_row = 0; prog_col = 0; prog_r_bl = 0; prog_r_blb = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin ref_bl[r][c] = 1_000_000; ref_blb[r][c] = 1_000_000; end
    // program every cell with random values from 5 kOhm to 900 kOhm
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        prog_en = 1; prog_row = 5'(r); prog_col = 5'(c);
        prog_r_bl  = $urandom_range(5_000, 900_000);
        prog_r_blb = $urandom_range(5_000, 900_000);
        ref_bl[r][c] = prog_r_bl; ref_blb[r][c] = prog_r_blb;
      end
    @(negedge clk);
    prog_en = 0;
    #1;
    check(bl_r[0] == 32'hFFFF_FFFF && blb_r[5] == 32'hFFFF_FFFF, "open with no row");
    for (int r = 0; r < ROWS; r++) begin
      wl = ROWS'(1) << r; sl = ROWS'(1) << r;
      #1;
      for (int c = 0; c < COLS; c++)
        check(bl_r[c] == ref_bl[r][c] && blb_r[c] == ref_blb[r][c],
              $sformatf("row %0d col %0d: %0d/%0d expected %0d/%0d", r, c, bl_r[c], blb_r[c], ref_bl[r][c], ref_blb[r][c]));
      sl = '0;
      #1;
      check(bl_r[3] == 32'hFFFF_FFFF, "WL without SL is open");
      sl = ROWS'(1) << r; wl = '0;
      #1;
      check(blb_r[7] == 32'hFFFF_FFFF, "SL without WL is open");
    end
    // two rows in parallel
    wl = 32'h0000_0003; sl = 32'h0000_0003;
    #1;
    for (int c = 0; c < COLS; c++) begin
      real g; int unsigned e;
      g = 1.0 / real'(ref_bl[0][c]) + 1.0 / real'(ref_bl[1][c]);
      e = int'(1.0 / g);
      check((bl_r[c] >= e - 1) && (bl_r[c] <= e + 1), $sformatf("parallel col %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
