// tb_cnn_models: runs the trigger end to end in every network configuration
// of the design study that this architecture can build (models 1-14 and 16:
// padded images of 18 to 78 pixels, first-convolution kernels 3-8, strides
// 2-7, 1-4 filters), one model_runner each, all in parallel on one clock.
// Each configuration's parameter count, computed by cnn_pkg::n_params, is
// also checked against the study's table.
module tb_cnn_models;
  import cnn_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  localparam int NM = 15;
  // unpadded image, kernel, stride, filters, published parameter count
  function automatic int cfg(int m, int field);
    int t [NM][5];
    t = '{'{12, 3, 3, 1, 1237}, '{12, 3, 3, 2, 1256}, '{12, 3, 3, 4, 1294}, '{12, 4, 2, 1, 1884},
          '{12, 6, 2, 1, 1552}, '{18, 3, 3, 1, 1877}, '{18, 4, 4, 2, 1270}, '{18, 6, 3, 1, 1552},
          '{24, 5, 5, 1, 1253}, '{36, 7, 5, 1, 1917}, '{36, 7, 7, 1, 1277}, '{18, 6, 2, 1, 2800},
          '{18, 8, 2, 1, 2348}, '{24, 3, 3, 1, 2773}, '{72, 8, 7, 1, 3372}};
    return t[m][field];
  endfunction

  logic done [NM];
  int   ck [NM];
  int   fl [NM];

  for (genvar m = 0; m < NM; m++) begin : g_model
    model_runner #(.IMG_M(cfg(m, 0)), .K1_M(cfg(m, 1)), .S1_M(cfg(m, 2)), .F1_M(cfg(m, 3))) u_run (
      .clk, .rst_n, .done(done[m]), .checks(ck[m]), .failures(fl[m]));
  end

  int checks = 0, failures = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (n_params(cfg(m, 0) + 2 * PAD, cfg(m, 1), cfg(m, 2), cfg(m, 3)) != cfg(m, 4)) begin
        failures++; $display("config %0d: parameter count differs from the published one", m);
      end
    end
    do begin
      @(posedge clk);
      all = 1'b1;
      for (int m = 0; m < NM; m++) all &= done[m];
    end while (!all);
    for (int m = 0; m < NM; m++) begin
      checks += ck[m];
      failures += fl[m];
      $display("config %0d (%0dx%0d padded, k%0d s%0d f%0d): %0d checks, %0d failures",
               m, cfg(m, 0) + 2 * PAD, cfg(m, 0) + 2 * PAD, cfg(m, 1), cfg(m, 2), cfg(m, 3), ck[m], fl[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
