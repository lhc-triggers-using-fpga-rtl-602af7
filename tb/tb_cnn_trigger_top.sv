// tb_cnn_trigger_top: end-to-end test of the trigger at its default size
// (12x12 image padded to 18x18, the chosen network, 1294 parameters).
//
// The testbench loads a random parameter set through the write port, then sends
// crossings of random candidates (tower indices 0..79, so some fall outside the
// image; ET up to 200 GeV with occasional 300-600 GeV deposits that push pixels
// past the 512 GeV saturation). For every crossing it builds the expected image
// itself (histogram, clip and scale, phi wrap and eta zero padding), runs the
// integer reference network and checks: the logit exactly, the score within
// 150/65536 of the sigmoid, the accept bit against a threshold placed 600
// counts above or below the expected score, the decision latency (31 cycles
// after evt_end when idle) and the order of results.
//
// Mechanisms that must each occur at least once: candidates accumulating while
// the previous image is read out (ping-pong), a dropped crossing, a pixel
// clipped at 512 GeV, energy copied by the phi wrap, ReLU clipping, accepted
// and rejected crossings, and crossings every 18 cycles (the initiation
// interval) as well as every 54 cycles (time-multiplexing period of six
// crossings at 360 MHz).
module tb_cnn_trigger_top;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  localparam int NP = 1294;
  localparam int DEC_LATENCY = 31;

  int checks = 0, failures = 0;
  int n_overlap = 0, n_drop = 0, n_clip = 0, n_wrap = 0, relu_hits = 0;
  int n_acc = 0, n_rej = 0, n_fast = 0, n_slow = 0, n_dec = 0;

  logic        cv, ee, we;
  logic [6:0]  ie, ip;
  et_t         et;
  logic [10:0] wa;
  logic [15:0] wd;
  score_t      thr;
  logic        lv, sv, dv, acc, dr;
  act_t        logit;
  score_t      score;
  logic [31:0] n_scored, n_accepted;

  cnn_trigger_top dut (
    .clk, .rst_n, .cand_valid(cv), .cand_ieta(ie), .cand_iphi(ip), .cand_et(et), .evt_end(ee),
    .param_wr_en(we), .param_wr_addr(wa), .param_wr_data(wd), .threshold(thr),
    .logit_valid(lv), .logit, .score_valid(sv), .score, .dec_valid(dv), .accept(acc),
    .dropped(dr), .n_scored, .n_accepted);

  typedef struct {
    int logit;
    int thr;
    bit accept;
    int end_cycle;
    bit idle;
  } exp_t;
  exp_t expq [$];
  int   cyc = 0;
  int   prm [];
  bit   hist_reading;
  always @(posedge clk) cyc <= cyc + 1;

  // Threshold for the crossing whose score is about to be decided.
  always_comb thr = (expq.size() > 0) ? score_t'(expq[0].thr) : '0;

  always @(negedge clk) if (rst_n) begin
    if (cv && dut.u_hist.reading) n_overlap++;
    if (dr) n_drop++;
    if (lv) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected result"); end
      else if (int'(logit) != expq[0].logit) begin
        failures++;
        if (failures < 10) $display("logit %0d expected %0d", logit, expq[0].logit);
      end
    end
    if (sv && expq.size() > 0) begin
      real e; int err;
      e = ref_sigmoid(expq[0].logit) * 65536.0;
      err = int'(e) - int'(score);
      if (err < 0) err = -err;
      checks++;
      if (err > 150) begin failures++; $display("score %0d expected %f", score, e); end
    end
    if (dv && expq.size() > 0) begin
      exp_t x;
      x = expq.pop_front();
      n_dec++;
      checks++;
      if (acc != x.accept) begin failures++; $display("accept %0d expected %0d", acc, x.accept); end
      if (acc) n_acc++; else n_rej++;
      if (x.idle) begin
        checks++;
        if (cyc - x.end_cycle != DEC_LATENCY) begin
          failures++; $display("decision %0d cycles after evt_end", cyc - x.end_cycle);
        end
      end
    end
  end

  // One crossing of n candidates. keep: expected to be processed.
  task automatic crossing(int n, bit keep, bit idle);
    int h[], pix[], img[];
    int lg;
    real s;
    exp_t x;
    h = new[144];
    foreach (h[i]) h[i] = 0;
    for (int i = 0; i < n; i++) begin
      int e, p, v;
      e = int'($urandom_range(79));
      p = int'($urandom_range(71));
      v = ($urandom_range(9) == 0) ? int'($urandom_range(1200, 2400)) : int'($urandom_range(800));
      cv = 1'b1; ie = 7'(e); ip = 7'(p); et = et_t'(v); ee = (i == n - 1);
      if (e < 72) begin
        h[(e / 6) * 12 + p / 6] += v;
        if (h[(e / 6) * 12 + p / 6] > 65535) h[(e / 6) * 12 + p / 6] = 65535;
      end
      @(posedge clk); #1;
    end
    cv = 1'b0; ee = 1'b0;
    if (!keep) return;
    pix = new[144];
    foreach (pix[i]) begin
      if (h[i] > 2048) n_clip++;
      pix[i] = ((h[i] > 2048 ? 2048 : h[i]) * 1024) / 2048;
      if ((i % 12 < 3 || i % 12 >= 9) && pix[i] != 0) n_wrap++;
    end
    ref_pad(pix, 12, 3, img);
    lg = ref_network(img, 18, 3, 3, 4, prm, relu_hits);
    s = ref_sigmoid(lg) * 65536.0;
    x.logit = lg;
    x.accept = ($urandom_range(1) == 1) && s > 700.0;
    x.thr = x.accept ? int'(s) - 600 : int'(s) + 600;
    if (x.thr > 65535) begin x.thr = 65535; x.accept = 0; end
    x.end_cycle = cyc - 1;
    x.idle = idle;
    expq.push_back(x);
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; cv = 0; ee = 0; ie = '0; ip = '0; et = '0; we = 0; wa = '0; wd = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // load the weights
    ref_random_params(NP, 40, 3000, prm);
    for (int i = 0; i < NP; i++) begin
      we = 1'b1; wa = 11'(i); wd = 16'(prm[i]);
      @(posedge clk); #1;
    end
    we = 1'b0;
    // isolated crossings: latency check
    for (int k = 0; k < 3; k++) begin
      crossing(40, 1, 1);
      repeat (60) @(posedge clk); #1;
    end
    // time-multiplexed rate: one crossing every 54 cycles
    for (int k = 0; k < 10; k++) begin crossing(54, 1, 0); n_slow++; end
    // the initiation interval: one crossing every 18 cycles
    for (int k = 0; k < 12; k++) begin crossing(18, 1, 0); n_fast++; end
    // too fast: the second crossing is dropped
    repeat (60) @(posedge clk); #1;
    crossing(10, 1, 0);
    crossing(5, 0, 0);
    repeat (100) @(posedge clk); #1;
    checks += 9;
    if (expq.size() != 0) begin failures++; $display("%0d crossings without a decision", expq.size()); end
    if (n_overlap == 0) begin failures++; $display("ping-pong never exercised"); end
    if (n_drop != 1) begin failures++; $display("drops: %0d", n_drop); end
    if (n_clip == 0) begin failures++; $display("512 GeV clip never exercised"); end
    if (n_wrap == 0) begin failures++; $display("phi wrap never exercised"); end
    if (relu_hits == 0) begin failures++; $display("ReLU never clipped"); end
    if (n_acc == 0 || n_rej == 0) begin failures++; $display("accepts %0d rejects %0d", n_acc, n_rej); end
    if (int'(n_scored) != n_dec || int'(n_accepted) != n_acc) begin failures++; $display("counters %0d/%0d", n_scored, n_accepted); end
    if (n_fast == 0 || n_slow == 0) failures++;
    $display("decisions %0d (accept %0d, reject %0d); ping-pong cycles %0d; drops %0d; clipped pixels %0d; wrapped pixels %0d; relu zeros %0d",
             n_dec, n_acc, n_rej, n_overlap, n_drop, n_clip, n_wrap, relu_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
