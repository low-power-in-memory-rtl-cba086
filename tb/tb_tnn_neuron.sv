// tb_tnn_neuron: random ternary rows and inputs are accumulated over one to
// four rows; the sum is recomputed in the testbench with integer
// multiplication, and the activation with the phi rule (+1 above Delta, -1
// below -Delta, 0 otherwise). Edge cases s = +-Delta are forced, and clear
// and the one-cycle act_valid are checked.
module tb_tnn_neuron;
  import tnn_pkg::*;
  localparam int N = 32, W = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n;
  logic clear, acc_en, fire;
  trit_t w [N];
  trit_t x [N];
  logic signed [W-1:0] thresh, sum;
  logic        [W-1:0] delta;
  trit_t act;
  logic  act_valid;
  int seen_pos = 0, seen_neg = 0, seen_zero = 0;

  tnn_neuron #(.N_IN(N), .ACC_W(W)) dut (.clk, .rst_n, .clear, .acc_en, .w, .x,
    .fire, .thresh, .delta, .sum, .act, .act_valid);

  always #5 clk = ~clk;

  function automatic int tv(trit_t t);
    return (t == TRIT_POS) ? 1 : (t == TRIT_NEG) ? -1 : 0;
  endfunction
  function automatic trit_t rt();
    case ($urandom_range(2)) 0: return TRIT_ZERO; 1: return TRIT_POS; default: return TRIT_NEG; endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; acc_en = 0; fire = 0; thresh = 0; delta = 0;
    for (int i = 0; i < N; i++) begin w[i] = TRIT_ZERO; x[i] = TRIT_ZERO; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int exp_sum, s, nrows;
      trit_t exp_act;
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      checks++;
      if (sum != 0) begin failures++; $display("FAIL clear"); end
      exp_sum = 0;
      nrows = $urandom_range(1, 4);
      for (int r = 0; r < nrows; r++) begin
        for (int i = 0; i < N; i++) begin w[i] = rt(); x[i] = rt(); exp_sum += tv(w[i]) * tv(x[i]); end
        acc_en = 1;
        @(negedge clk);
        acc_en = 0;
      end
      checks++;
      if (int'(sum) != exp_sum) begin failures++; $display("FAIL sum %0d exp %0d", sum, exp_sum); end
      delta = W'($urandom_range(0, 6));
      case (t % 4)
        0: thresh = W'(exp_sum - int'(delta));      // s = +delta -> 0
        1: thresh = W'(exp_sum + int'(delta));      // s = -delta -> 0
        default: thresh = W'($urandom_range(0, 40) - 20);
      endcase
      s = exp_sum - int'(thresh);
      exp_act = (s > int'(delta)) ? TRIT_POS : (s < -int'(delta)) ? TRIT_NEG : TRIT_ZERO;
      fire = 1;
      @(negedge clk);
      fire = 0;
      checks++;
      if (!act_valid || act != exp_act) begin
        failures++;
        $display("FAIL act=%b valid=%b exp=%b s=%0d delta=%0d", act, act_valid, exp_act, s, delta);
      end
      case (exp_act) TRIT_POS: seen_pos++; TRIT_NEG: seen_neg++; default: seen_zero++; endcase
      @(negedge clk);
      checks++;
      if (act_valid) begin failures++; $display("FAIL act_valid not one cycle"); end
    end
    checks++;
    if (seen_pos == 0 || seen_neg == 0 || seen_zero == 0) begin
      failures++; $display("FAIL not all activation values exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
