// model_runner: drives one cnn_trigger_top built for a given network
// configuration (unpadded image size, first-convolution kernel, stride and
// filters) through a short end-to-end run and counts checks and failures.
//
// It loads a random parameter set of the size the configuration needs, sends
// N_EVT crossings of random candidates, each after the previous decision, and
// compares the logit with the integer reference model (histogram with
// 72/IMG_M towers per pixel, clip and scale, wrap/zero padding, network) and
// the accept bit with a threshold placed either side of the expected score.
// A last check requires at least one non-zero logit so the comparison is not
// vacuous. `done` rises when all crossings have been decided.
module model_runner
  import cnn_pkg::*;
  import cnn_ref_pkg::*;
#(
  parameter int IMG_M = 12,
  parameter int K1_M  = 3,
  parameter int S1_M  = 3,
  parameter int F1_M  = 4,
  parameter int N_EVT = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int P  = IMG_M + 2 * PAD;
  localparam int NP = n_params(P, K1_M, S1_M, F1_M);
  localparam int AW = $clog2(NP);
  localparam int DS = 72 / IMG_M;

  logic          cv, ee, we;
  logic [6:0]    ie, ip;
  et_t           et;
  logic [AW-1:0] wa;
  logic [15:0]   wd;
  score_t        thr;
  logic          lv, sv, dv, acc, dr;
  act_t          logit;
  score_t        score;
  logic [31:0]   n_scored, n_accepted;

  cnn_trigger_top #(.IMG_T(IMG_M), .K1_T(K1_M), .S1_T(S1_M), .F1_T(F1_M)) dut (
    .clk, .rst_n, .cand_valid(cv), .cand_ieta(ie), .cand_iphi(ip), .cand_et(et), .evt_end(ee),
    .param_wr_en(we), .param_wr_addr(wa), .param_wr_data(wd), .threshold(thr),
    .logit_valid(lv), .logit, .score_valid(sv), .score, .dec_valid(dv), .accept(acc),
    .dropped(dr), .n_scored, .n_accepted);

  initial begin
    int prm[], h[], pix[], img[];
    int lg, relu_hits, n_nonzero;
    bit exp_acc;
    real s;
    done = 1'b0; checks = 0; failures = 0; relu_hits = 0; n_nonzero = 0;
    cv = 0; ee = 0; we = 0; ie = '0; ip = '0; et = '0; wa = '0; wd = '0; thr = '0;
    @(posedge clk iff rst_n); #1;
    ref_random_params(NP, 40, 3000, prm);
    for (int i = 0; i < NP; i++) begin
      we = 1'b1; wa = AW'(i); wd = 16'(prm[i]);
      @(posedge clk); #1;
    end
    we = 1'b0;
    for (int n = 0; n < N_EVT; n++) begin
      h = new[IMG_M * IMG_M];
      foreach (h[i]) h[i] = 0;
      for (int i = 0; i < 40; i++) begin
        int e, p, v;
        e = int'($urandom_range(71)); p = int'($urandom_range(71));
        v = ($urandom_range(7) == 0) ? int'($urandom_range(1500, 2500)) : int'($urandom_range(800));
        cv = 1'b1; ie = 7'(e); ip = 7'(p); et = et_t'(v); ee = (i == 39);
        h[(e / DS) * IMG_M + p / DS] += v;
        @(posedge clk); #1;
      end
      cv = 1'b0; ee = 1'b0;
      pix = new[IMG_M * IMG_M];
      foreach (pix[i]) pix[i] = ((h[i] > 2048 ? 2048 : h[i]) * 1024) / 2048;
      ref_pad(pix, IMG_M, PAD, img);
      lg = ref_network(img, P, K1_M, S1_M, F1_M, prm, relu_hits);
      if (lg != 0) n_nonzero++;
      s = ref_sigmoid(lg) * 65536.0;
      exp_acc = (n % 2 == 0) && s > 700.0;
      thr = score_t'(exp_acc ? int'(s) - 600 : (int'(s) + 600 > 65535 ? 65535 : int'(s) + 600));
      @(posedge clk iff lv); #1;
      checks++;
      if (int'(logit) != lg) begin
        failures++;
        $display("model img %0d k %0d s %0d f %0d: logit %0d expected %0d", P, K1_M, S1_M, F1_M, logit, lg);
      end
      @(posedge clk iff dv); #1;
      checks++;
      if (acc != exp_acc) begin failures++; $display("model img %0d: accept %0d expected %0d", P, acc, exp_acc); end
      repeat (5) @(posedge clk); #1;
    end
    // The run is only meaningful if the network produced non-zero logits.
    checks++;
    if (n_nonzero == 0) begin failures++; $display("model img %0d: every logit was zero", P); end
    done = 1'b1;
  end

endmodule
