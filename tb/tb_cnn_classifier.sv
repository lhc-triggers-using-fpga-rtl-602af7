// tb_cnn_classifier: the whole network at its default size (18x18 padded
// input, conv 3x3 stride 3 with 4 filters, conv 3x3x4, dense 32/16/8, output
// neuron, sigmoid) with random weights and random images.
//
// Checks: the logit of every image equals the integer reference model; the
// score is within 150/65536 of the exact sigmoid of the reference logit;
// images sent back to back, one padded row per cycle (a new image every 18
// cycles, the initiation interval of the chosen model), each give exactly one
// score; the score follows the first row by a fixed 25 cycles, inside the
// 102-cycle (283 ns at 360 MHz) latency budget.
module tb_cnn_classifier;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  localparam int P  = 18;
  localparam int NP = 1294;
  localparam int LATENCY = 25;

  int checks = 0, failures = 0, relu_hits = 0;

  logic        iv, is, lv, sv;
  act_t        row [P];
  logic [15:0] prm [NP];
  act_t        logit;
  score_t      score;
  cnn_classifier dut (.clk, .rst_n, .in_valid(iv), .in_sof(is), .in_row(row), .params(prm),
                      .logit_valid(lv), .logit, .score_valid(sv), .score);

  int exp_logit [$];
  int sof_cycle [$];
  int cyc = 0;
  int n_scores = 0;
  int lmin = 1 << 30, lmax = -(1 << 30);
  always @(posedge clk) cyc <= cyc + 1;

  // Logit and score of the same image arrive one cycle apart.
  int pending_logit;
  always @(negedge clk) if (rst_n) begin
    if (lv) begin
      checks++;
      if (exp_logit.size() == 0) begin failures++; $display("unexpected logit"); end
      else begin
        pending_logit = exp_logit.pop_front();
        if (int'(logit) != pending_logit) begin
          failures++;
          if (failures < 10) $display("logit %0d expected %0d", logit, pending_logit);
        end
        if (pending_logit < lmin) lmin = pending_logit;
        if (pending_logit > lmax) lmax = pending_logit;
      end
    end
    if (sv) begin
      real e; int err, lat;
      n_scores++;
      e = ref_sigmoid(pending_logit) * 65536.0;
      err = int'(e) - int'(score);
      if (err < 0) err = -err;
      checks++;
      if (err > 150) begin failures++; $display("score %0d expected %f", score, e); end
      lat = cyc - sof_cycle.pop_front();
      checks++;
      if (lat != LATENCY || lat > 102) begin failures++; $display("latency %0d cycles", lat); end
    end
  end

  task automatic send_image(int img[]);
    int r;
    for (int y = 0; y < P; y++) begin
      iv = 1'b1; is = (y == 0);
      for (int x = 0; x < P; x++) row[x] = act_t'(img[y * P + x]);
      if (y == 0) sof_cycle.push_back(cyc);
      @(posedge clk); #1;
    end
    iv = 1'b0; is = 1'b0;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p[], img12[], img[];
    rst_n = 1'b0; iv = 0; is = 0;
    for (int x = 0; x < P; x++) row[x] = '0;
    ref_random_params(NP, 40, 3000, p);
    foreach (p[i]) prm[i] = 16'(p[i]);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int set = 0; set < 3; set++) begin
      if (set > 0) begin
        repeat (40) @(posedge clk); #1;  // let the pipeline drain first
        ref_random_params(NP, 40 + 40 * set, 3000, p);
        foreach (p[i]) prm[i] = 16'(p[i]);
      end
      for (int n = 0; n < 20; n++) begin
        img12 = new[144];
        foreach (img12[i]) img12[i] = ($urandom_range(3) == 0) ? int'($urandom_range(1024)) : 0;
        ref_pad(img12, 12, 3, img);
        exp_logit.push_back(ref_network(img, P, 3, 3, 4, p, relu_hits));
        send_image(img);   // back to back: the next image starts right away
      end
    end
    repeat (40) @(posedge clk); #1;
    checks += 3;
    if (n_scores != 60) begin failures++; $display("%0d scores for 60 images", n_scores); end
    if (relu_hits == 0) begin failures++; $display("ReLU never clipped"); end
    if (lmin >= 0 || lmax <= 0) begin failures++; $display("logits did not span both signs (%0d..%0d)", lmin, lmax); end
    $display("scores %0d, logits %0d..%0d, relu zeros %0d", n_scores, lmin, lmax, relu_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
