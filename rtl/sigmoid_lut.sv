// sigmoid_lut: logistic function 1 / (1 + exp(-x)) on a 16-bit fixed-point
// input, by table lookup.
//
// The input x has ACT_FRAC = 10 fractional bits. The range [-X_RANGE, X_RANGE)
// is cut into N_LUT equal bins; inputs outside it are clamped to the first or
// last bin. Each table entry is the logistic function at the centre of its bin,
// scaled by 2^16 and limited to 0xFFFF, computed when the design is elaborated.
// With the defaults (1024 bins over [-8, 8)) the bin index is
// (x + 8*1024) >> 4. The score is unsigned with 16 fractional bits and appears
// one cycle after in_valid.
//
// A 16-bit sigmoid after the output neuron follows the paper; the table size,
// range and bin-centre sampling are this design's choices.
module sigmoid_lut
  import cnn_pkg::*;
#(
  parameter int N_LUT   = 1024,
  parameter int X_RANGE = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  act_t   in_x,
  output logic   out_valid,
  output score_t out_score
);

  localparam int IDX_W = $clog2(N_LUT);
  localparam int SPAN  = 2 * X_RANGE * (1 << ACT_FRAC);  // input codes covered
  localparam int STEP  = SPAN / N_LUT;                   // input codes per bin

  typedef score_t tab_t [N_LUT];

  function automatic tab_t build_table();
    tab_t t;
    for (int i = 0; i < N_LUT; i++) begin
      real x, s;
      x = -real'(X_RANGE) + 2.0 * real'(X_RANGE) * (real'(i) + 0.5) / real'(N_LUT);
      s = 1.0 / (1.0 + $exp(-x)) * 65536.0;
      t[i] = (s >= 65535.0) ? '1 : score_t'(int'($floor(s + 0.5)));
    end
    return t;
  endfunction

  localparam tab_t TABLE = build_table();

  logic [IDX_W-1:0] idx;
  always_comb begin
    int shifted;
    shifted = int'(in_x) + X_RANGE * (1 << ACT_FRAC);
    if (shifted < 0)          idx = '0;
    else if (shifted >= SPAN) idx = '1;
    else                      idx = IDX_W'(shifted / STEP);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_score <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_score <= TABLE[idx];
    end
  end

  initial assert (SPAN % N_LUT == 0) else $error("table bins must be a whole number of input codes");

endmodule
