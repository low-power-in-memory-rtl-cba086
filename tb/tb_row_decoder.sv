// tb_row_decoder: every address with every combination of WL and SL drive;
// the expected word-line and source-line vectors are built as 1 << address.
module tb_row_decoder;
  localparam int ROWS = 32;
  int checks = 0, failures = 0;
  logic [4:0]      row_addr;
  logic            wl_in, sl_in;
  logic [ROWS-1:0] wl, sl;

  row_decoder #(.ROWS(ROWS)) dut (.row_addr, .wl_in, .sl_in, .wl, .sl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < ROWS; a++)
      for (int m = 0; m < 4; m++) begin
        logic [ROWS-1:0] onehot;
        row_addr = 5'(a);
        wl_in = m[0];
        sl_in = m[1];
        #1;
        onehot = ROWS'(1) << a;
        checks++;
        if (wl !== (m[0] ? onehot : '0) || sl !== (m[1] ? onehot : '0)) begin
          failures++;
          $display("FAIL addr=%0d wl_in=%b sl_in=%b wl=%h sl=%h", a, wl_in, sl_in, wl, sl);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
