// pixel_scaler: saturates every pixel's ET at 512 GeV and scales it to [0, 1].
//
// The network is trained on images whose pixels lie in [0, 1]: the pixel ET is
// first clipped at 512 GeV and then divided by 512 GeV. With ET counted in
// 0.25 GeV steps (ET_SAT = 2048 counts) and pixels in the activation format
// (10 fractional bits, 1.0 = 1024), the pixel is min(ET, ET_SAT) * 1024 / ET_SAT,
// rounded down. One image row (IMG pixels) is processed per cycle with one
// register stage; valid and start-of-image flags travel alongside.
//
// The 512 GeV saturation and the [0, 1] scaling follow the paper; the ET step
// and the pixel format are this design's choices.
module pixel_scaler
  import cnn_pkg::*;
#(
  parameter int IMG_P    = IMG,
  parameter int ET_SAT_P = ET_SAT
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_sof,
  input  et_t  in_et  [IMG_P],
  output logic out_valid,
  output logic out_sof,
  output act_t out_pix [IMG_P]
);

  function automatic act_t scale(et_t et);
    logic [ET_W+ACT_FRAC-1:0] num;
    num = (int'(et) >= ET_SAT_P) ? (ET_W+ACT_FRAC)'(ET_SAT_P) : (ET_W+ACT_FRAC)'(et);
    num = num << ACT_FRAC;
    return act_t'(num / (ET_W+ACT_FRAC)'(ET_SAT_P));
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      for (int p = 0; p < IMG_P; p++) out_pix[p] <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_sof;
      for (int p = 0; p < IMG_P; p++) out_pix[p] <= scale(in_et[p]);
    end
  end

endmodule
