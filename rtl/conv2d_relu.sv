// conv2d_relu: 2D convolution (valid, no implicit padding) with bias and ReLU,
// computing one whole output row per clock cycle.
//
// The feature map streams in one row per cycle: in_row holds the IN_W x CIN
// values of one row, in_sof marks row 0 of a new map. A line buffer keeps the
// last K-1 rows. When input row y arrives and y = oy*S + K-1 for an output row
// oy < OUT_H, the K x K x CIN window of every output column ox and every filter
// f is multiplied by the kernel in that same cycle (OUT_W * F * K*K*CIN
// multipliers, the im2col arrangement unrolled over a whole row), the bias is
// added and the sum is requantised (floor, saturate) to the activation format
// after ReLU. The row leaves on out_row one cycle later with out_sof on row 0.
//
// Arithmetic: activations have ACT_FRAC fractional bits, weights and biases
// W_FRAC, so products carry ACT_FRAC + W_FRAC fractional bits; the bias is
// aligned to that and the sum shifted right by W_FRAC.
//
// Defaults are the first convolution of the chosen network (18x18x1 input,
// 3x3 kernel, stride 3, 4 filters, 6x6x4 output); the second convolution is the
// same module with IN 6x6x4, K 3, S 1, F 1. The row-per-cycle parallelism of the
// first convolution, the kernel geometry and the 8-bit weights follow the paper;
// the line-buffer streaming, weight order w[f][ky][kx][c] and rounding are this
// design's choices.
module conv2d_relu
  import cnn_pkg::*;
#(
  parameter int IN_H = IMG + 2 * PAD,
  parameter int IN_W = IMG + 2 * PAD,
  parameter int CIN  = 1,
  parameter int K    = K1,
  parameter int S    = S1,
  parameter int F    = F1,
  localparam int OUT_H = (IN_H - K) / S + 1,
  localparam int OUT_W = (IN_W - K) / S + 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_sof,
  input  act_t in_row  [IN_W][CIN],
  input  wgt_t w       [F][K][K][CIN],
  input  wgt_t b       [F],
  output logic out_valid,
  output logic out_sof,
  output act_t out_row [OUT_W][F]
);

  localparam int YW = $clog2(IN_H + 1);

  act_t          lb [K-1][IN_W][CIN];  // lb[K-2] is the newest stored row
  logic [YW-1:0] y_prev;               // index of the last row received
  logic [YW-1:0] y;                    // index of the row now on in_row
  logic          fire;                 // an output row is completed by this input row
  logic [YW-1:0] oy;

  always_comb begin
    y    = in_sof ? '0 : y_prev + 1'b1;
    fire = 1'b0;
    oy   = '0;
    if (in_valid && int'(y) >= K - 1 && ((int'(y) - (K - 1)) % S) == 0
        && ((int'(y) - (K - 1)) / S) < OUT_H) begin
      fire = 1'b1;
      oy   = YW'((int'(y) - (K - 1)) / S);
    end
  end

  // Window row ky of the current position: rows older than the incoming one
  // come from the line buffer.
  function automatic act_t pix(int ky, int x, int c);
    if (ky == K - 1) return in_row[x][c];
    return lb[ky][x][c];
  endfunction

  act_t row_next [OUT_W][F];
  always_comb begin
    for (int ox = 0; ox < OUT_W; ox++) begin
      for (int f = 0; f < F; f++) begin
        acc_t acc;
        acc = acc_t'(b[f]) <<< ACT_FRAC;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++)
            for (int c = 0; c < CIN; c++)
              acc += acc_t'(pix(ky, ox * S + kx, c)) * acc_t'(w[f][ky][kx][c]);
        row_next[ox][f] = requant(acc, W_FRAC, 1'b1);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_prev    <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      for (int r = 0; r < K - 1; r++)
        for (int x = 0; x < IN_W; x++)
          for (int c = 0; c < CIN; c++) lb[r][x][c] <= '0;
      for (int ox = 0; ox < OUT_W; ox++)
        for (int f = 0; f < F; f++) out_row[ox][f] <= '0;
    end else begin
      out_valid <= fire;
      out_sof   <= fire && (oy == '0);
      if (in_valid) begin
        y_prev <= y;
        for (int r = 0; r < K - 2; r++) lb[r] <= lb[r+1];
        lb[K-2] <= in_row;
      end
      if (fire) out_row <= row_next;
    end
  end

endmodule
