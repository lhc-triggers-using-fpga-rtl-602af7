// image_padder: pads the IMG x IMG eta-phi image to (IMG+2*PAD) x (IMG+2*PAD).
//
// The phi axis is a circle cut open to form the image, so a jet near one phi
// edge would be split. Each row is therefore extended by copying PAD phi columns
// from the opposite edge onto each side (padded column c holds phi
// (c - PAD) mod IMG). The eta axis has real edges and is padded with PAD rows of
// zeros above and below, so the first convolution can also cover the edge pixels.
//
// Timing: the image enters as IMG consecutive rows (in_sof on the first). The
// padded image leaves as IMG+2*PAD consecutive rows starting the cycle after
// in_sof: PAD zero rows, then the image rows delayed by PAD cycles through a
// PAD-deep row delay line, then PAD zero rows. A new image may start once the
// previous padded image has been sent (every IMG+2*PAD cycles at the fastest).
//
// Wrapping PAD columns onto both sides and zero-padding PAD rows on both sides
// follows the padded sizes of the paper's table (12 -> 18); the text names
// "three pixel columns". The streaming arrangement is this design's.
module image_padder
  import cnn_pkg::*;
#(
  parameter int IMG_P = IMG,
  parameter int PAD_P = PAD
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_sof,
  input  act_t in_row  [IMG_P],
  output logic out_valid,
  output logic out_sof,
  output act_t out_row [IMG_P + 2 * PAD_P],
  output logic busy
);

  localparam int OW = IMG_P + 2 * PAD_P;
  localparam int CW = $clog2(OW + 1);

  act_t          dl [PAD_P][IMG_P];   // row delay line, dl[PAD_P-1] is oldest
  logic [CW-1:0] cnt;                 // padded rows sent so far in this image
  logic          active;

  // Phi wrap of one row.
  function automatic act_t wrap(act_t r [IMG_P], int c);
    return r[(c - PAD_P + IMG_P) % IMG_P];
  endfunction

  assign busy = active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int d = 0; d < PAD_P; d++)
        for (int p = 0; p < IMG_P; p++) dl[d][p] <= '0;
      cnt       <= '0;
      active    <= 1'b0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      for (int c = 0; c < OW; c++) out_row[c] <= '0;
    end else begin
      dl[0] <= in_row;
      for (int d = 1; d < PAD_P; d++) dl[d] <= dl[d-1];

      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (in_valid && in_sof) begin
        active    <= 1'b1;
        cnt       <= CW'(1);
        out_valid <= 1'b1;
        out_sof   <= 1'b1;
        for (int c = 0; c < OW; c++) out_row[c] <= '0;
      end else if (active) begin
        out_valid <= 1'b1;
        for (int c = 0; c < OW; c++)
          out_row[c] <= (int'(cnt) >= PAD_P && int'(cnt) < PAD_P + IMG_P) ? wrap(dl[PAD_P-1], c) : '0;
        if (int'(cnt) == OW - 1) begin
          active <= 1'b0;
          cnt    <= '0;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // Images must not overlap: a new one starts only after the last padded row.
  assert property (@(posedge clk) disable iff (!rst_n) (in_valid && in_sof) |-> !active);

endmodule
