// dense_layer: fully connected layer, out[o] = act(b[o] + sum_i w[o][i] * in[i]).
//
// All N_OUT x N_IN products are formed in the cycle in_valid is high and the
// result is registered, so out_valid follows in_valid by one cycle and a new
// vector may be presented every cycle. Weights and biases are WW-bit signed
// with WF fractional bits; activations use the shared activation format. The
// sum is requantised by flooring away WF fractional bits and saturating, after
// a ReLU when RELU = 1.
//
// The three hidden layers (16->32, 32->16, 16->8) use 8-bit weights with two
// integer bits and a ReLU; the output neuron (8->1) uses 16-bit weights and no
// ReLU, its result going to the sigmoid. Layer sizes, activations and weight
// widths follow the paper; full parallelism, the 10 fractional bits of the
// 16-bit output weights and the rounding are this design's choices.
module dense_layer
  import cnn_pkg::*;
#(
  parameter int N_IN  = 16,
  parameter int N_OUT = D1,
  parameter int WW    = W_W,
  parameter int WF    = W_FRAC,
  parameter bit RELU  = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  act_t                 in_vec  [N_IN],
  input  logic signed [WW-1:0] w       [N_OUT][N_IN],
  input  logic signed [WW-1:0] b       [N_OUT],
  output logic                 out_valid,
  output act_t                 out_vec [N_OUT]
);

  act_t vec_next [N_OUT];
  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      acc_t acc;
      acc = acc_t'(b[o]) <<< ACT_FRAC;
      for (int i = 0; i < N_IN; i++) acc += acc_t'(in_vec[i]) * acc_t'(w[o][i]);
      vec_next[o] = requant(acc, WF, RELU);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < N_OUT; o++) out_vec[o] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_vec <= vec_next;
    end
  end

endmodule
