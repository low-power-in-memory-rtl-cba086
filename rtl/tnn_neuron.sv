// tnn_neuron: ternary neuron A_j = phi( sum_i GXNOR(W_ji, X_i) - T_j ).
//
// Each cycle with acc_en high, the N_IN products GXNOR(w[i], x[i]) of one
// row of weights and the matching inputs are summed by an adder tree and
// added to a signed accumulator; a neuron with more than N_IN inputs is
// built up over several row reads. 'clear' zeroes the accumulator (clear
// wins over acc_en). 'fire' evaluates the activation on the current
// accumulator: with s = sum - thresh, act = +1 if s > delta, -1 if
// s < -delta, else 0; act and act_valid appear one cycle after 'fire'.
// Equation and activation function follow the paper; the paper gives no
// circuit for them, so the adder tree, the multi-row accumulation, the
// integer thresholds (the paper's Delta is a real number applied after batch
// normalisation) and the widths are this design's choices. The accumulator
// wraps on overflow; ACC_W = 16 holds any neuron of up to 32767 inputs.
module tnn_neuron
  import tnn_pkg::*;
#(
  parameter int unsigned N_IN  = 32,
  parameter int unsigned ACC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    acc_en,
  input  trit_t                   w [N_IN],
  input  trit_t                   x [N_IN],
  input  logic                    fire,
  input  logic signed [ACC_W-1:0] thresh,
  input  logic        [ACC_W-1:0] delta,
  output logic signed [ACC_W-1:0] sum,
  output trit_t                   act,
  output logic                    act_valid
);

  trit_t                   prod [N_IN];
  logic signed [ACC_W-1:0] row_sum;
  logic signed [ACC_W:0]   s;          // one bit wider: sum - thresh cannot wrap
  logic signed [ACC_W:0]   d;

  for (genvar i = 0; i < N_IN; i++) begin : g_mul
    gxnor u_gxnor (.w(w[i]), .x(x[i]), .y(prod[i]));
  end

  always_comb begin
    row_sum = '0;
    for (int i = 0; i < N_IN; i++)
      row_sum = row_sum + ACC_W'(trit_value(prod[i]));
  end

  always_comb begin
    s = (ACC_W+1)'(sum) - (ACC_W+1)'(thresh);
    d = $signed({1'b0, delta});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum       <= '0;
      act       <= TRIT_ZERO;
      act_valid <= 1'b0;
    end else begin
      if (clear)       sum <= '0;
      else if (acc_en) sum <= sum + row_sum;
      act_valid <= fire;
      if (fire) begin
        if (s > d)       act <= TRIT_POS;
        else if (s < -d) act <= TRIT_NEG;
        else             act <= TRIT_ZERO;
      end
    end
  end

endmodule
