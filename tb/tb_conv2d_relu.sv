// tb_conv2d_relu: checks the row-streaming convolution in both of its uses.
//
// Instance A has the first-convolution geometry (18x18x1, 3x3, stride 3,
// 4 filters), instance B the second (6x6x4, 3x3, stride 1, 1 filter). Random
// images and kernels (including negative weights, so ReLU clipping occurs) are
// streamed in one row per cycle; every output value is compared with the
// integer reference model, and every output row must appear exactly one cycle
// after the input row that completes its window (row oy after input row
// oy*S + K-1), which is the row-per-cycle rate.
module tb_conv2d_relu;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int relu_zeros = 0;

  // ---------------------------------------------------------------- A: conv1
  localparam int AH = 18, AC = 1, AK = 3, AS = 3, AF = 4, AO = 6;
  logic a_iv, a_is, a_ov, a_os;
  act_t a_in [AH][AC];
  wgt_t a_w [AF][AK][AK][AC];
  wgt_t a_b [AF];
  act_t a_out [AO][AF];
  conv2d_relu #(.IN_H(AH), .IN_W(AH), .CIN(AC), .K(AK), .S(AS), .F(AF)) dut_a (
    .clk, .rst_n, .in_valid(a_iv), .in_sof(a_is), .in_row(a_in), .w(a_w), .b(a_b),
    .out_valid(a_ov), .out_sof(a_os), .out_row(a_out));

  // ---------------------------------------------------------------- B: conv2
  localparam int BH = 6, BC = 4, BK = 3, BS = 1, BF = 1, BO = 4;
  logic b_iv, b_is, b_ov, b_os;
  act_t b_in [BH][BC];
  wgt_t b_w [BF][BK][BK][BC];
  wgt_t b_b [BF];
  act_t b_out [BO][BF];
  conv2d_relu #(.IN_H(BH), .IN_W(BH), .CIN(BC), .K(BK), .S(BS), .F(BF)) dut_b (
    .clk, .rst_n, .in_valid(b_iv), .in_sof(b_is), .in_row(b_in), .w(b_w), .b(b_b),
    .out_valid(b_ov), .out_sof(b_os), .out_row(b_out));

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  // Runs one image through an instance and checks rows and their timing.
  task automatic run_a(int trial);
    int img[], w[], b[], exp[];
    int row_seen;
    img = new[AH * AH * AC];
    foreach (img[i]) img[i] = (trial == 0) ? 1024 : rnd(0, 1024);
    w = new[AF * AK * AK * AC];
    foreach (w[i]) w[i] = rnd(-128, 127);
    b = new[AF];
    foreach (b[i]) b[i] = rnd(-128, 127);
    for (int f = 0; f < AF; f++) begin
      a_b[f] = wgt_t'(b[f]);
      for (int ky = 0; ky < AK; ky++) for (int kx = 0; kx < AK; kx++) for (int c = 0; c < AC; c++)
        a_w[f][ky][kx][c] = wgt_t'(w[((f * AK + ky) * AK + kx) * AC + c]);
    end
    ref_conv(img, AH, AH, AC, w, b, AK, AS, AF, exp);
    foreach (exp[i]) if (exp[i] == 0) relu_zeros++;
    row_seen = 0;
    for (int y = 0; y < AH; y++) begin
      a_iv = 1'b1; a_is = (y == 0);
      for (int x = 0; x < AH; x++) for (int c = 0; c < AC; c++) a_in[x][c] = act_t'(img[(y * AH + x) * AC + c]);
      @(posedge clk); #1;
      a_iv = 1'b0; a_is = 1'b0;
      // output row oy must be present exactly after input row oy*S+K-1
      if (y >= AK - 1 && (y - (AK - 1)) % AS == 0) begin
        int oy; oy = (y - (AK - 1)) / AS;
        checks++;
        if (!a_ov || a_os != (oy == 0)) begin
          failures++; $display("A: row %0d not valid on time (v=%0d sof=%0d)", oy, a_ov, a_os);
        end
        for (int ox = 0; ox < AO; ox++) for (int f = 0; f < AF; f++) begin
          checks++;
          if (int'(a_out[ox][f]) != exp[(oy * AO + ox) * AF + f]) begin
            failures++;
            if (failures < 10) $display("A: out[%0d][%0d][%0d]=%0d exp %0d", oy, ox, f, a_out[ox][f], exp[(oy * AO + ox) * AF + f]);
          end
        end
        row_seen++;
      end else begin
        checks++;
        if (a_ov) begin failures++; $display("A: unexpected output after input row %0d", y); end
      end
    end
    checks++;
    if (row_seen != AO) failures++;
  endtask

  task automatic run_b();
    int img[], w[], b[], exp[];
    img = new[BH * BH * BC];
    foreach (img[i]) img[i] = rnd(0, 4000);
    w = new[BF * BK * BK * BC];
    foreach (w[i]) w[i] = rnd(-128, 127);
    b = new[BF];
    foreach (b[i]) b[i] = rnd(-128, 127);
    for (int f = 0; f < BF; f++) begin
      b_b[f] = wgt_t'(b[f]);
      for (int ky = 0; ky < BK; ky++) for (int kx = 0; kx < BK; kx++) for (int c = 0; c < BC; c++)
        b_w[f][ky][kx][c] = wgt_t'(w[((f * BK + ky) * BK + kx) * BC + c]);
    end
    ref_conv(img, BH, BH, BC, w, b, BK, BS, BF, exp);
    foreach (exp[i]) if (exp[i] == 0) relu_zeros++;
    for (int y = 0; y < BH; y++) begin
      b_iv = 1'b1; b_is = (y == 0);
      for (int x = 0; x < BH; x++) for (int c = 0; c < BC; c++) b_in[x][c] = act_t'(img[(y * BH + x) * BC + c]);
      @(posedge clk); #1;
      b_iv = 1'b0; b_is = 1'b0;
      // gap cycle between rows, as conv1 delivers them every 3 cycles
      if (y >= BK - 1) begin
        int oy; oy = y - (BK - 1);
        checks++;
        if (!b_ov || b_os != (oy == 0)) begin failures++; $display("B: row %0d not valid", oy); end
        for (int ox = 0; ox < BO; ox++) begin
          checks++;
          if (int'(b_out[ox][0]) != exp[oy * BO + ox]) begin
            failures++;
            if (failures < 10) $display("B: out[%0d][%0d]=%0d exp %0d", oy, ox, b_out[ox][0], exp[oy * BO + ox]);
          end
        end
      end
      @(posedge clk); #1;
      checks++;
      if (b_ov) failures++;
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; a_iv = 0; a_is = 0; b_iv = 0; b_is = 0;
    for (int x = 0; x < AH; x++) a_in[x][0] = '0;
    for (int x = 0; x < BH; x++) for (int c = 0; c < BC; c++) b_in[x][c] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 20; t++) run_a(t);
    for (int t = 0; t < 20; t++) run_b();
    checks++;
    if (relu_zeros == 0) begin failures++; $display("ReLU clipping never exercised"); end
    $display("relu zeros seen: %0d", relu_zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
