// tb_flatten_buffer: sends random 4x4x2 and 4x4x1 feature maps as 4 rows with
// gaps of two idle cycles (as the second convolution delivers them) and checks
// that exactly one vector appears, in the cycle after the last row, holding
// element (h, w, c) at index (h*4 + w)*C + c.
module tb_flatten_buffer;
  import cnn_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic iv, is, ov;
  act_t in_row [4][2];
  act_t out_vec [32];
  flatten_buffer #(.H(4), .W(4), .C(2)) dut (.clk, .rst_n, .in_valid(iv), .in_sof(is), .in_row,
                                             .out_valid(ov), .out_vec);

  logic iv1, is1, ov1;
  act_t in_row1 [4][1];
  act_t out_vec1 [16];
  flatten_buffer dut1 (.clk, .rst_n, .in_valid(iv1), .in_sof(is1), .in_row(in_row1),
                       .out_valid(ov1), .out_vec(out_vec1));

  int m [4][4][2];

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; iv = 0; is = 0; iv1 = 0; is1 = 0;
    for (int j = 0; j < 4; j++) begin in_row[j][0] = '0; in_row[j][1] = '0; in_row1[j][0] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 40; n++) begin
      for (int h = 0; h < 4; h++) for (int w = 0; w < 4; w++) for (int c = 0; c < 2; c++)
        m[h][w][c] = int'($urandom_range(30000));
      for (int h = 0; h < 4; h++) begin
        iv = 1'b1; is = (h == 0); iv1 = 1'b1; is1 = (h == 0);
        for (int w = 0; w < 4; w++) begin
          for (int c = 0; c < 2; c++) in_row[w][c] = act_t'(m[h][w][c]);
          in_row1[w][0] = act_t'(m[h][w][1]);
        end
        @(posedge clk); #1;
        iv = 1'b0; is = 1'b0; iv1 = 1'b0; is1 = 1'b0;
        checks++;
        if (ov != (h == 3) || ov1 != (h == 3)) begin failures++; $display("map %0d row %0d: out_valid wrong", n, h); end
        if (h == 3) begin
          for (int hh = 0; hh < 4; hh++) for (int w = 0; w < 4; w++) begin
            for (int c = 0; c < 2; c++) begin
              checks++;
              if (int'(out_vec[(hh * 4 + w) * 2 + c]) != m[hh][w][c]) failures++;
            end
            checks++;
            if (int'(out_vec1[hh * 4 + w]) != m[hh][w][1]) failures++;
          end
        end
        repeat (2) begin
          @(posedge clk); #1;
          checks++;
          if (ov || ov1) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
