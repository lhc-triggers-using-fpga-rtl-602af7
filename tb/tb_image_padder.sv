// tb_image_padder: streams random 12x12 images (12 consecutive rows) and
// checks the 18 padded rows: rows 0-2 and 15-17 all zero, rows 3-14 the input
// rows with columns 0-2 copied from phi 9-11 and columns 15-17 from phi 0-2.
// The padded rows must be consecutive and start the cycle after the first input
// row; images are sent back to back every 18 cycles.
module tb_image_padder;
  import cnn_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int wrap_nonzero = 0;

  logic iv, is, ov, os, busy;
  act_t in_row [12];
  act_t out_row [18];
  image_padder dut (.clk, .rst_n, .in_valid(iv), .in_sof(is), .in_row,
                    .out_valid(ov), .out_sof(os), .out_row, .busy);

  int img [12][12];

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; iv = 0; is = 0;
    for (int p = 0; p < 12; p++) in_row[p] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 30; n++) begin
      for (int e = 0; e < 12; e++) for (int p = 0; p < 12; p++) img[e][p] = int'($urandom_range(1024));
      for (int c = 0; c < 18; c++) begin
        // drive input row c (if any), then look at padded row c
        if (c < 12) begin
          iv = 1'b1; is = (c == 0);
          for (int p = 0; p < 12; p++) in_row[p] = act_t'(img[c][p]);
        end else begin
          iv = 1'b0; is = 1'b0;
          for (int p = 0; p < 12; p++) in_row[p] = act_t'(-1);
        end
        @(posedge clk); #1;
        checks++;
        if (!ov || os != (c == 0)) begin failures++; $display("img %0d row %0d: valid/sof wrong", n, c); end
        for (int x = 0; x < 18; x++) begin
          int expv;
          if (c < 3 || c >= 15) expv = 0;
          else expv = img[c - 3][(x - 3 + 12) % 12];
          if ((x < 3 || x >= 15) && expv != 0) wrap_nonzero++;
          checks++;
          if (int'(out_row[x]) != expv) begin
            failures++;
            if (failures < 10) $display("img %0d row %0d col %0d: %0d expected %0d", n, c, x, out_row[x], expv);
          end
        end
      end
    end
    iv = 1'b0;
    @(posedge clk); #1;
    checks += 2;
    if (ov) failures++;
    if (wrap_nonzero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
