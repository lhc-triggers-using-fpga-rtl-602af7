// cnn_trigger_top: image-recognition Level-1 trigger for one time-multiplexed
// processing node.
//
// Data flow, one bunch crossing at a time:
//   candidates (tower eta, tower phi, ET) -> et_histogrammer (12x12 ET image,
//   ping-pong banks) -> pixel_scaler (clip at 512 GeV, scale to [0,1]) ->
//   image_padder (phi wrap, eta zero padding, 18x18) -> cnn_classifier
//   (conv 3x3/3 x4, conv 3x3x4, dense 32/16/8, output neuron, sigmoid) ->
//   trigger_decision (score > threshold).
// Weights and biases are written into param_store through param_wr_*.
//
// Timing: candidates of a crossing are presented one per cycle and closed with
// evt_end. The image is read out at most once every IMG+2*PAD = 18 cycles (the
// network's initiation interval); a crossing that ends while the previous image
// is still waiting is dropped and flagged on `dropped`. The decision for a
// crossing follows its readout by a fixed latency (see the module
// documentation). With a 360 MHz clock, 18 cycles are 50 ns, inside the
// 150 ns (6 crossings) that time-multiplexing over six nodes allows.
module cnn_trigger_top
  import cnn_pkg::*;
#(
  parameter int IMG_T = IMG,
  parameter int PAD_T = PAD,
  parameter int K1_T  = K1,
  parameter int S1_T  = S1,
  parameter int F1_T  = F1,
  localparam int IMG_PAD = IMG_T + 2 * PAD_T,
  localparam int NP  = n_params(IMG_PAD, K1_T, S1_T, F1_T),
  localparam int AW  = $clog2(NP)
) (
  input  logic          clk,
  input  logic          rst_n,
  // candidates of the current crossing
  input  logic          cand_valid,
  input  logic [6:0]    cand_ieta,
  input  logic [6:0]    cand_iphi,
  input  et_t           cand_et,
  input  logic          evt_end,
  // weight loading
  input  logic          param_wr_en,
  input  logic [AW-1:0] param_wr_addr,
  input  logic [15:0]   param_wr_data,
  // working point
  input  score_t        threshold,
  // results
  output logic          logit_valid,
  output act_t          logit,
  output logic          score_valid,
  output score_t        score,
  output logic          dec_valid,
  output logic          accept,
  output logic          dropped,
  output logic [31:0]   n_scored,
  output logic [31:0]   n_accepted
);

  logic h_valid, h_sof;
  et_t  h_row [IMG_T];
  et_histogrammer #(.TOWERS_P(TOWERS), .IMG_P(IMG_T), .READ_INTERVAL(IMG_PAD)) u_hist (
    .clk, .rst_n, .cand_valid, .cand_ieta, .cand_iphi, .cand_et, .evt_end,
    .row_valid(h_valid), .row_sof(h_sof), .row_et(h_row), .dropped);

  logic s_valid, s_sof;
  act_t s_row [IMG_T];
  pixel_scaler #(.IMG_P(IMG_T)) u_scale (
    .clk, .rst_n, .in_valid(h_valid), .in_sof(h_sof), .in_et(h_row),
    .out_valid(s_valid), .out_sof(s_sof), .out_pix(s_row));

  logic p_valid, p_sof;
  act_t p_row [IMG_PAD];
  image_padder #(.IMG_P(IMG_T), .PAD_P(PAD_T)) u_pad (
    .clk, .rst_n, .in_valid(s_valid), .in_sof(s_sof), .in_row(s_row),
    .out_valid(p_valid), .out_sof(p_sof), .out_row(p_row), .busy());

  logic [15:0] params [NP];
  param_store #(.N_PARAMS(NP)) u_params (
    .clk, .rst_n, .wr_en(param_wr_en), .wr_addr(param_wr_addr), .wr_data(param_wr_data),
    .params);

  cnn_classifier #(.IMG_P(IMG_PAD), .K1_P(K1_T), .S1_P(S1_T), .F1_P(F1_T)) u_cnn (
    .clk, .rst_n, .in_valid(p_valid), .in_sof(p_sof), .in_row(p_row), .params,
    .logit_valid, .logit, .score_valid, .score);

  trigger_decision u_dec (
    .clk, .rst_n, .score_valid, .score, .threshold,
    .dec_valid, .accept, .n_scored, .n_accepted);

endmodule
