// tb_trigger_decision: random scores against random and edge thresholds
// (score equal to threshold must be rejected, one above accepted); checks the
// registered decision one cycle later and the scored/accepted counters.
module tb_trigger_decision;
  import cnn_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic sv, dv, acc;
  score_t sc, thr;
  logic [31:0] ns, na;
  trigger_decision dut (.clk, .rst_n, .score_valid(sv), .score(sc), .threshold(thr),
                        .dec_valid(dv), .accept(acc), .n_scored(ns), .n_accepted(na));

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_s, exp_a, n_acc, n_rej;
    rst_n = 1'b0; sv = 0; sc = '0; thr = '0;
    exp_s = 0; exp_a = 0; n_acc = 0; n_rej = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      bit e;
      thr = score_t'($urandom_range(65535));
      case (t % 4)
        0: sc = thr;
        1: sc = (thr == 16'hFFFF) ? thr : thr + 1'b1;
        default: sc = score_t'($urandom_range(65535));
      endcase
      sv = (t % 5 != 4);
      e = sc > thr;
      @(posedge clk); #1;
      checks++;
      if (dv != sv) failures++;
      if (sv) begin
        exp_s++;
        if (e) begin exp_a++; n_acc++; end else n_rej++;
        checks++;
        if (acc != e) begin failures++; if (failures < 10) $display("score %0d thr %0d accept %0d", sc, thr, acc); end
      end
      checks += 2;
      if (int'(ns) != exp_s) failures++;
      if (int'(na) != exp_a) failures++;
    end
    checks++;
    if (n_acc == 0 || n_rej == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
