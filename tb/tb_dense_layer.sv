// tb_dense_layer: checks the fully connected layer in its hidden-layer form
// (16 -> 32, 8-bit weights, ReLU) and its output-neuron form (8 -> 1, 16-bit
// weights, no ReLU). Random vectors and weights are applied on consecutive
// cycles; each result must appear exactly one cycle later and equal the integer
// reference. Large inputs are included so saturation is exercised too.
module tb_dense_layer;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int relu_zeros = 0, sat_hits = 0;

  logic h_iv, h_ov;
  act_t h_in [16];
  wgt_t h_w [32][16];
  wgt_t h_b [32];
  act_t h_out [32];
  dense_layer #(.N_IN(16), .N_OUT(32)) dut_h (
    .clk, .rst_n, .in_valid(h_iv), .in_vec(h_in), .w(h_w), .b(h_b),
    .out_valid(h_ov), .out_vec(h_out));

  logic o_iv, o_ov;
  act_t  o_in [8];
  owgt_t o_w [1][8];
  owgt_t o_b [1];
  act_t  o_out [1];
  dense_layer #(.N_IN(8), .N_OUT(1), .WW(16), .WF(10), .RELU(1'b0)) dut_o (
    .clk, .rst_n, .in_valid(o_iv), .in_vec(o_in), .w(o_w), .b(o_b),
    .out_valid(o_ov), .out_vec(o_out));

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hx[], hw[], hb[], he[], ox[], ow[], ob[], oe[];
    int hmax, omax;
    rst_n = 1'b0; h_iv = 0; o_iv = 0;
    hw = new[32 * 16]; hb = new[32]; ow = new[8]; ob = new[1];
    foreach (hw[i]) begin hw[i] = rnd(-128, 127); h_w[i / 16][i % 16] = wgt_t'(hw[i]); end
    foreach (hb[i]) begin hb[i] = rnd(-128, 127); h_b[i] = wgt_t'(hb[i]); end
    foreach (ow[i]) begin ow[i] = rnd(-32768, 32767); o_w[0][i] = owgt_t'(ow[i]); end
    ob[0] = rnd(-32768, 32767); o_b[0] = owgt_t'(ob[0]);
    for (int i = 0; i < 16; i++) h_in[i] = '0;
    for (int i = 0; i < 8; i++) o_in[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      hmax = (t % 4 == 0) ? 32767 : 2048;
      omax = (t % 4 == 0) ? 32767 : 4096;
      hx = new[16]; foreach (hx[i]) begin hx[i] = rnd(0, hmax); h_in[i] = act_t'(hx[i]); end
      ox = new[8];  foreach (ox[i]) begin ox[i] = rnd(0, omax); o_in[i] = act_t'(ox[i]); end
      ref_dense(hx, 16, 32, hw, hb, 6, 1'b1, he);
      ref_dense(ox, 8, 1, ow, ob, 10, 1'b0, oe);
      h_iv = 1'b1; o_iv = 1'b1;
      @(posedge clk); #1;
      h_iv = (t % 3 != 2); o_iv = h_iv;  // some idle cycles in between
      checks++;
      if (!h_ov || !o_ov) begin failures++; $display("t%0d: result not valid one cycle later", t); end
      foreach (he[o]) begin
        checks++;
        if (he[o] == 0) relu_zeros++;
        if (he[o] == 32767) sat_hits++;
        if (int'(h_out[o]) != he[o]) begin
          failures++;
          if (failures < 10) $display("hidden t%0d o%0d: %0d exp %0d", t, o, h_out[o], he[o]);
        end
      end
      checks++;
      if (oe[0] == 32767 || oe[0] == -32768) sat_hits++;
      if (int'(o_out[0]) != oe[0]) begin
        failures++;
        if (failures < 10) $display("output t%0d: %0d exp %0d", t, o_out[0], oe[0]);
      end
      if (!h_iv) begin
        @(posedge clk); #1;
        checks++;
        if (h_ov || o_ov) begin failures++; $display("valid without input"); end
      end
      h_iv = 1'b0; o_iv = 1'b0;
    end
    checks += 2;
    if (relu_zeros == 0) begin failures++; $display("ReLU never clipped"); end
    if (sat_hits == 0) begin failures++; $display("saturation never reached"); end
    $display("relu zeros %0d, saturations %0d", relu_zeros, sat_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
