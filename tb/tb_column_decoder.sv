// tb_column_decoder: loads random trits on all 32 columns and checks that
// each address selects its own column, over several random patterns.
module tb_column_decoder;
  import tnn_pkg::*;
  localparam int COLS = 32;
  int checks = 0, failures = 0;
  logic [4:0] col_sel;
  trit_t      col_in [COLS];
  trit_t      out;

  column_decoder #(.COLS(COLS)) dut (.col_sel, .col_in, .out);

  function automatic trit_t rand_trit();
    case ($urandom_range(2))
      0: return TRIT_ZERO;
      1: return TRIT_POS;
      default: return TRIT_NEG;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 8; p++) begin
      for (int c = 0; c < COLS; c++) col_in[c] = rand_trit();
      for (int c = 0; c < COLS; c++) begin
        col_sel = 5'(c);
        #1;
        checks++;
        if (out != col_in[c]) begin
          failures++;
          $display("FAIL sel=%0d out=%b expected %b", c, out, col_in[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
