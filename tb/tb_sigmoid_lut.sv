// tb_sigmoid_lut: sweeps the logit over its whole 16-bit range and compares
// the registered score with 65536 / (1 + exp(-x/1024)). The table has 1024
// bins over [-8, 8), so within the range the error is bounded by half a bin
// times the steepest slope (1/4) plus rounding, about 0.0021 (140 counts);
// outside it the clamped value is within 0.0004 of the true one. The score
// must also never decrease as the input grows, and must follow in_valid by
// exactly one cycle.
module tb_sigmoid_lut;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic   iv, ov;
  act_t   x;
  score_t s;
  sigmoid_lut dut (.clk, .rst_n, .in_valid(iv), .in_x(x), .out_valid(ov), .out_score(s));

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev, maxerr;
    rst_n = 1'b0; iv = 1'b0; x = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    prev = -1; maxerr = 0;
    for (int v = -32768; v < 32768; v += 7) begin
      real e; int err;
      x = act_t'(v); iv = 1'b1;
      @(posedge clk); #1;
      iv = 1'b0;
      e = ref_sigmoid(v) * 65536.0;
      err = int'(e) - int'(s);
      if (err < 0) err = -err;
      if (err > maxerr) maxerr = err;
      checks += 3;
      if (!ov) failures++;
      if (err > 150) begin
        failures++;
        if (failures < 10) $display("x=%0d score=%0d expected %f", v, s, e);
      end
      if (int'(s) < prev) begin failures++; $display("not monotonic at %0d", v); end
      prev = int'(s);
    end
    // midpoint: sigmoid(0) = 0.5
    x = '0; iv = 1'b1; @(posedge clk); #1; iv = 1'b0;
    checks++;
    if (s < 16'd32618 || s > 16'd32918) begin failures++; $display("sigmoid(0) = %0d", s); end
    @(posedge clk); #1;
    checks++;
    if (ov) failures++;
    $display("max error %0d counts", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
