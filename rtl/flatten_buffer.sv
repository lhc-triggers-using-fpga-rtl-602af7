// flatten_buffer: gathers the rows of a H x W x C feature map into one vector.
//
// Rows arrive one at a time (in_valid, in_sof on row 0, not necessarily on
// consecutive cycles). Each row is written into its slice of the vector; when
// row H-1 arrives the complete vector is presented for one cycle on out_vec
// with out_valid. Element order is row-major over (h, w, c), the order a
// channels-last framework uses when it flattens a tensor.
//
// Flattening before the fully connected layers follows the paper; the element
// order is this design's choice.
module flatten_buffer
  import cnn_pkg::*;
#(
  parameter int H = 4,
  parameter int W = 4,
  parameter int C = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_sof,
  input  act_t in_row [W][C],
  output logic out_valid,
  output act_t out_vec [H*W*C]
);

  localparam int HW = $clog2(H + 1);

  act_t          store [H][W][C];
  logic [HW-1:0] h_prev;
  logic [HW-1:0] h;

  assign h = in_sof ? '0 : h_prev + 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      h_prev    <= '0;
      out_valid <= 1'b0;
      for (int i = 0; i < H; i++)
        for (int j = 0; j < W; j++)
          for (int c = 0; c < C; c++) store[i][j][c] <= '0;
      for (int i = 0; i < H * W * C; i++) out_vec[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && int'(h) < H) begin
        h_prev   <= h;
        store[int'(h)] <= in_row;
        if (int'(h) == H - 1) begin
          out_valid <= 1'b1;
          for (int i = 0; i < H - 1; i++)
            for (int j = 0; j < W; j++)
              for (int c = 0; c < C; c++) out_vec[(i * W + j) * C + c] <= store[i][j][c];
          for (int j = 0; j < W; j++)
            for (int c = 0; c < C; c++) out_vec[((H - 1) * W + j) * C + c] <= in_row[j][c];
        end
      end
    end
  end

endmodule
