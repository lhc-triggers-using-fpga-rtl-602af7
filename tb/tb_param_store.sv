// tb_param_store: checks the 1294-word parameter store: all words zero after
// reset, random writes land at their address only, a later write overwrites,
// and writes beyond the last address change nothing.
module tb_param_store;
  import cnn_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  localparam int N = 1294;
  int checks = 0, failures = 0;

  logic        we;
  logic [10:0] wa;
  logic [15:0] wd;
  logic [15:0] prm [N];
  param_store dut (.clk, .rst_n, .wr_en(we), .wr_addr(wa), .wr_data(wd), .params(prm));

  int model [N];

  task automatic compare(string what);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (int'(prm[i]) != model[i]) begin
        failures++;
        if (failures < 10) $display("%s: word %0d = %0h expected %0h", what, i, prm[i], model[i]);
      end
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; we = 0; wa = '0; wd = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    foreach (model[i]) model[i] = 0;
    compare("reset");
    for (int i = 0; i < N; i++) begin
      we = 1'b1; wa = 11'(i); wd = 16'($urandom); model[i] = int'(wd);
      @(posedge clk); #1;
    end
    we = 1'b0;
    compare("fill");
    for (int t = 0; t < 500; t++) begin
      we = 1'b1; wa = 11'($urandom_range(2047)); wd = 16'($urandom);
      if (int'(wa) < N) model[wa] = int'(wd);
      @(posedge clk); #1;
    end
    we = 1'b0;
    compare("rewrite");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
