// tb_ternary_readout: applies the four (Q, Qb) combinations with and
// without the sample strobe and checks the captured weight against the read
// rule: Q != Qb -> sign from Q; Q == Qb -> 0; no strobe -> weight held.
module tb_ternary_readout;
  import tnn_pkg::*;
  int checks = 0, failures = 0;
  logic  clk = 0, rst_n;
  logic  q, qb, sample;
  logic  xor_o;
  trit_t weight;
  trit_t model;

  ternary_readout dut (.clk, .rst_n, .q, .qb, .sample, .xor_o, .weight);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; q = 1; qb = 1; sample = 0; model = TRIT_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++;
    if (weight != TRIT_ZERO) begin failures++; $display("FAIL reset value"); end
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      q      = $urandom_range(1);
      qb     = $urandom_range(1);
      sample = (i < 8) ? 1'b1 : 1'($urandom_range(1));
      #1;
      checks++;
      if (xor_o != (q != qb)) begin failures++; $display("FAIL xor q=%b qb=%b", q, qb); end
      if (sample) model = (q == qb) ? TRIT_ZERO : (q ? TRIT_POS : TRIT_NEG);
      @(posedge clk); #1;
      checks++;
      if (weight != model) begin
        failures++;
        $display("FAIL i=%0d q=%b qb=%b sample=%b weight=%b expected %b", i, q, qb, sample, weight, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
