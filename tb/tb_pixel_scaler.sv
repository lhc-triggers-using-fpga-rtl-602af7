// tb_pixel_scaler: random row ETs, a third of them above the 512 GeV
// (2048-count) saturation point, and the end points 0, 2047, 2048, 65535.
// Each pixel must equal floor(min(ET, 2048) * 1024 / 2048) one cycle later,
// with valid and start-of-image delayed alongside.
module tb_pixel_scaler;
  import cnn_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, saturated = 0;

  logic iv, is, ov, os;
  et_t  et [12];
  act_t px [12];
  pixel_scaler dut (.clk, .rst_n, .in_valid(iv), .in_sof(is), .in_et(et),
                    .out_valid(ov), .out_sof(os), .out_pix(px));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [12];
    rst_n = 1'b0; iv = 0; is = 0;
    for (int p = 0; p < 12; p++) et[p] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      for (int p = 0; p < 12; p++) begin
        case ($urandom_range(2))
          0: e[p] = int'($urandom_range(65535));
          default: e[p] = int'($urandom_range(2047));
        endcase
        if (t == 0) e[p] = (p % 4 == 0) ? 0 : (p % 4 == 1) ? 2047 : (p % 4 == 2) ? 2048 : 65535;
        et[p] = et_t'(e[p]);
      end
      iv = 1'b1; is = (t % 12 == 0);
      @(posedge clk); #1;
      checks++;
      if (!ov || os != (t % 12 == 0)) begin failures++; $display("flags wrong at %0d", t); end
      for (int p = 0; p < 12; p++) begin
        int expv;
        expv = ((e[p] > 2048 ? 2048 : e[p]) * 1024) / 2048;
        if (e[p] >= 2048) saturated++;
        checks++;
        if (int'(px[p]) != expv) begin
          failures++;
          if (failures < 10) $display("et %0d -> %0d expected %0d", e[p], px[p], expv);
        end
      end
    end
    iv = 1'b0; is = 1'b0;
    @(posedge clk); #1;
    checks += 2;
    if (ov) failures++;
    if (saturated == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
