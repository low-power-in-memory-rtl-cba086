// tb_gxnor: exhaustive check of the gated XNOR gate against the GXNOR
// truth table written out below as integers (+1, -1, 0), independent of the
// gate's sign-bit logic. All 16 input codes are applied, including the
// unused code 2'b10, which must behave as 0.
module tb_gxnor;
  import tnn_pkg::*;
  int checks = 0, failures = 0;
  trit_t w, x, y;

  gxnor dut (.w, .x, .y);

  function automatic int code_to_int(logic [1:0] c);
    case (c)
      2'b01: return 1;
      2'b11: return -1;
      default: return 0;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 4; a++)
      for (int b = 0; b < 4; b++) begin
        int expv;
        w = trit_t'(a[1:0]);
        x = trit_t'(b[1:0]);
        #1;
        expv = code_to_int(a[1:0]) * code_to_int(b[1:0]);
        checks++;
        if (code_to_int(y) != expv || (expv == 0 && y != TRIT_ZERO)) begin
          failures++;
          $display("FAIL w=%b x=%b y=%b expected %0d", w, x, y, expv);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
