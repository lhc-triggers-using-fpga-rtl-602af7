// param_store: register file holding the network's trained weights and biases.
//
// N_PARAMS words of 16 bits, written one per cycle through wr_en/wr_addr/
// wr_data and read all at once on `params`, because every layer uses all of its
// weights in each cycle it computes. 8-bit parameters occupy the low byte of
// their word (the upper byte is ignored by the layers). Writes to addresses at
// or above N_PARAMS are ignored. Reset clears every word, which makes the
// network output the sigmoid of zero until weights are loaded.
//
// The layout (see cnn_pkg: conv1, conv2, dense1..3, output; weights before
// biases) and loading the weights at run time are this design's choices; in the
// paper the trained weights are constants built into the firmware.
module param_store
  import cnn_pkg::*;
#(
  parameter int N_PARAMS = n_params(IMG + 2 * PAD, K1, S1, F1),
  localparam int AW = $clog2(N_PARAMS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [15:0]   wr_data,
  output logic [15:0]   params [N_PARAMS]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PARAMS; i++) params[i] <= '0;
    end else if (wr_en && int'(wr_addr) < N_PARAMS) begin
      params[wr_addr] <= wr_data;
    end
  end

endmodule
