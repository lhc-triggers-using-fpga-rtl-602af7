// cnn_classifier: the image-classification network, from padded image rows to
// the sigmoid score.
//
// Pipeline (defaults = the chosen configuration):
//   padded 18x18x1 image, one row per cycle
//   -> conv1   3x3 kernels, stride 3, 4 filters, ReLU       -> 6x6x4, one row every 3 cycles
//   -> conv2   one 3x3x4 kernel, stride 1, ReLU             -> 4x4x1
//   -> flatten                                              -> 16
//   -> dense1  32 + ReLU -> dense2 16 + ReLU -> dense3 8 + ReLU
//   -> output neuron (16-bit weights)                       -> logit
//   -> sigmoid                                              -> score
// Each stage starts as soon as its inputs exist, so images can follow each other
// every IMG_P cycles (18, the rate at which padded rows arrive). The score of an
// image appears a fixed number of cycles after its first row: the input takes
// IMG_P cycles, then conv1/conv2/flatten/dense x3/output/sigmoid add one
// register each.
//
// Weights and biases come flattened from the parameter store (layout in
// cnn_pkg); this module slices them into each layer's arrays. The layer
// geometry, widths and the row-per-cycle first convolution follow the paper;
// the streaming between layers is this design's.
module cnn_classifier
  import cnn_pkg::*;
#(
  parameter int IMG_P = IMG + 2 * PAD,  // padded image size
  parameter int K1_P  = K1,
  parameter int S1_P  = S1,
  parameter int F1_P  = F1,
  localparam int NP   = n_params(IMG_P, K1_P, S1_P, F1_P)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_sof,
  input  act_t        in_row [IMG_P],
  input  logic [15:0] params [NP],
  output logic        logit_valid,
  output act_t        logit,
  output logic        score_valid,
  output score_t      score
);

  localparam int C1 = conv_out(IMG_P, K1_P, S1_P);  // conv1 output size
  localparam int C2 = conv_out(C1, K2, S2);          // conv2 output size
  localparam int NF = C2 * C2 * F2;

  localparam int O_C1B = off_c1b(K1_P, F1_P);
  localparam int O_C2W = off_c2w(K1_P, F1_P);
  localparam int O_C2B = off_c2b(K1_P, F1_P);
  localparam int O_D1W = off_d1w(K1_P, F1_P);
  localparam int O_D1B = off_d1b(IMG_P, K1_P, S1_P, F1_P);
  localparam int O_D2W = off_d2w(IMG_P, K1_P, S1_P, F1_P);
  localparam int O_D2B = off_d2b(IMG_P, K1_P, S1_P, F1_P);
  localparam int O_D3W = off_d3w(IMG_P, K1_P, S1_P, F1_P);
  localparam int O_D3B = off_d3b(IMG_P, K1_P, S1_P, F1_P);
  localparam int O_OW  = off_ow(IMG_P, K1_P, S1_P, F1_P);
  localparam int O_OB  = off_ob(IMG_P, K1_P, S1_P, F1_P);

  // ------------------------------------------------------------ weight views
  wgt_t  c1w [F1_P][K1_P][K1_P][1];
  wgt_t  c1b [F1_P];
  wgt_t  c2w [F2][K2][K2][F1_P];
  wgt_t  c2b [F2];
  wgt_t  d1w [D1][NF];
  wgt_t  d1b [D1];
  wgt_t  d2w [D2][D1];
  wgt_t  d2b [D2];
  wgt_t  d3w [D3][D2];
  wgt_t  d3b [D3];
  owgt_t ow  [1][D3];
  owgt_t ob  [1];

  always_comb begin
    for (int f = 0; f < F1_P; f++) begin
      for (int ky = 0; ky < K1_P; ky++)
        for (int kx = 0; kx < K1_P; kx++)
          c1w[f][ky][kx][0] = wgt_t'(params[(f * K1_P + ky) * K1_P + kx]);
      c1b[f] = wgt_t'(params[O_C1B + f]);
    end
    for (int ky = 0; ky < K2; ky++)
      for (int kx = 0; kx < K2; kx++)
        for (int c = 0; c < F1_P; c++)
          c2w[0][ky][kx][c] = wgt_t'(params[O_C2W + (ky * K2 + kx) * F1_P + c]);
    c2b[0] = wgt_t'(params[O_C2B]);
    for (int o = 0; o < D1; o++) begin
      for (int i = 0; i < NF; i++) d1w[o][i] = wgt_t'(params[O_D1W + o * NF + i]);
      d1b[o] = wgt_t'(params[O_D1B + o]);
    end
    for (int o = 0; o < D2; o++) begin
      for (int i = 0; i < D1; i++) d2w[o][i] = wgt_t'(params[O_D2W + o * D1 + i]);
      d2b[o] = wgt_t'(params[O_D2B + o]);
    end
    for (int o = 0; o < D3; o++) begin
      for (int i = 0; i < D2; i++) d3w[o][i] = wgt_t'(params[O_D3W + o * D2 + i]);
      d3b[o] = wgt_t'(params[O_D3B + o]);
    end
    for (int i = 0; i < D3; i++) ow[0][i] = owgt_t'(params[O_OW + i]);
    ob[0] = owgt_t'(params[O_OB]);
  end

  // ------------------------------------------------------------ datapath
  act_t in_row_c [IMG_P][1];
  always_comb for (int x = 0; x < IMG_P; x++) in_row_c[x][0] = in_row[x];

  logic c1_valid, c1_sof;
  act_t c1_row [C1][F1_P];
  conv2d_relu #(.IN_H(IMG_P), .IN_W(IMG_P), .CIN(1), .K(K1_P), .S(S1_P), .F(F1_P)) u_conv1 (
    .clk, .rst_n, .in_valid, .in_sof, .in_row(in_row_c), .w(c1w), .b(c1b),
    .out_valid(c1_valid), .out_sof(c1_sof), .out_row(c1_row));

  logic c2_valid, c2_sof;
  act_t c2_row [C2][F2];
  conv2d_relu #(.IN_H(C1), .IN_W(C1), .CIN(F1_P), .K(K2), .S(S2), .F(F2)) u_conv2 (
    .clk, .rst_n, .in_valid(c1_valid), .in_sof(c1_sof), .in_row(c1_row), .w(c2w), .b(c2b),
    .out_valid(c2_valid), .out_sof(c2_sof), .out_row(c2_row));

  logic fl_valid;
  act_t fl_vec [NF];
  flatten_buffer #(.H(C2), .W(C2), .C(F2)) u_flatten (
    .clk, .rst_n, .in_valid(c2_valid), .in_sof(c2_sof), .in_row(c2_row),
    .out_valid(fl_valid), .out_vec(fl_vec));

  logic d1_valid, d2_valid, d3_valid;
  act_t d1_vec [D1];
  act_t d2_vec [D2];
  act_t d3_vec [D3];
  act_t o_vec  [1];

  dense_layer #(.N_IN(NF), .N_OUT(D1)) u_dense1 (
    .clk, .rst_n, .in_valid(fl_valid), .in_vec(fl_vec), .w(d1w), .b(d1b),
    .out_valid(d1_valid), .out_vec(d1_vec));
  dense_layer #(.N_IN(D1), .N_OUT(D2)) u_dense2 (
    .clk, .rst_n, .in_valid(d1_valid), .in_vec(d1_vec), .w(d2w), .b(d2b),
    .out_valid(d2_valid), .out_vec(d2_vec));
  dense_layer #(.N_IN(D2), .N_OUT(D3)) u_dense3 (
    .clk, .rst_n, .in_valid(d2_valid), .in_vec(d2_vec), .w(d3w), .b(d3b),
    .out_valid(d3_valid), .out_vec(d3_vec));
  dense_layer #(.N_IN(D3), .N_OUT(1), .WW(OW_W), .WF(OW_FRAC), .RELU(1'b0)) u_output (
    .clk, .rst_n, .in_valid(d3_valid), .in_vec(d3_vec), .w(ow), .b(ob),
    .out_valid(logit_valid), .out_vec(o_vec));

  assign logit = o_vec[0];

  sigmoid_lut u_sigmoid (
    .clk, .rst_n, .in_valid(logit_valid), .in_x(o_vec[0]),
    .out_valid(score_valid), .out_score(score));

endmodule
