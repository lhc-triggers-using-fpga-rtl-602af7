// tb_et_histogrammer: drives crossings of random candidates and compares every
// image read out with a histogram the testbench builds itself (tower index / 6
// per axis, sums saturating at 65535, towers beyond 71 ignored).
//
// Covered: candidates of the next crossing arriving while the previous image
// is being read out (ping-pong), a crossing that ends while the previous image
// is still held (must be dropped, flagged, and leave no trace in later images),
// pixel-sum saturation, out-of-range towers, readouts at least 18 cycles apart,
// and the first row in the third cycle after the evt_end cycle when the pipeline is idle.
module tb_et_histogrammer;
  import cnn_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_overlap = 0, n_drop = 0, n_sat = 0, n_images = 0;

  logic       cv, ee, rv, rs, dr;
  logic [6:0] ie, ip;
  et_t        et;
  et_t        row [12];
  et_histogrammer dut (.clk, .rst_n, .cand_valid(cv), .cand_ieta(ie), .cand_iphi(ip), .cand_et(et),
                       .evt_end(ee), .row_valid(rv), .row_sof(rs), .row_et(row), .dropped(dr));

  typedef int img_t [12][12];
  img_t expq [$];
  int   cyc = 0;
  int   last_sof = -100;
  int   last_end = 0;
  bit   idle_latency_check = 0;
  int   rows_seen = 0;
  img_t cur;

  always @(posedge clk) cyc <= cyc + 1;

  // Monitor: gather rows into images and compare with the expected queue.
  always @(negedge clk) if (rst_n) begin
    if (cv && rv) n_overlap++;
    if (dr) n_drop++;
    if (rv) begin
      if (rs) begin
        checks++;
        if (rows_seen != 0) begin failures++; $display("sof in the middle of an image"); end
        if (cyc - last_sof < 18) begin failures++; $display("readouts %0d cycles apart", cyc - last_sof); end
        if (idle_latency_check) begin
          checks++;
          if (cyc - last_end != 3) begin failures++; $display("first row %0d cycles after evt_end", cyc - last_end); end
          idle_latency_check = 0;
        end
        last_sof = cyc;
      end
      for (int p = 0; p < 12; p++) cur[rows_seen][p] = int'(row[p]);
      rows_seen++;
      if (rows_seen == 12) begin
        rows_seen = 0;
        n_images++;
        checks++;
        if (expq.size() == 0) begin failures++; $display("unexpected image"); end
        else begin
          for (int a = 0; a < 12; a++) for (int b = 0; b < 12; b++) begin
            checks++;
            if (cur[a][b] != expq[0][a][b]) begin
              failures++;
              if (failures < 10) $display("image %0d pixel (%0d,%0d) = %0d expected %0d", n_images, a, b, cur[a][b], expq[0][a][b]);
            end
          end
          void'(expq.pop_front());
        end
      end
    end
  end

  // Sends one crossing of n candidates; `keep` says whether it should survive.
  task automatic crossing(int n, bit keep, bit big);
    img_t h;
    for (int a = 0; a < 12; a++) for (int b = 0; b < 12; b++) h[a][b] = 0;
    for (int i = 0; i < n; i++) begin
      int e, p, v;
      e = int'($urandom_range(79));   // 72..79 are outside the image
      p = int'($urandom_range(71));
      v = big ? int'($urandom_range(40000, 65535)) : int'($urandom_range(4000));
      cv = 1'b1; ie = 7'(e); ip = 7'(p); et = et_t'(v);
      ee = (i == n - 1);
      if (e < 72) begin
        h[e / 6][p / 6] += v;
        if (h[e / 6][p / 6] > 65535) begin h[e / 6][p / 6] = 65535; n_sat++; end
      end
      @(posedge clk); #1;
    end
    cv = 1'b0; ee = 1'b0;
    last_end = cyc - 1;
    if (keep) expq.push_back(h);
    checks++;
    if (dr != !keep) begin failures++; $display("dropped flag %0d, expected %0d", dr, !keep); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; cv = 0; ee = 0; ie = '0; ip = '0; et = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk); #1;
    // 1) isolated crossing, idle pipeline: first row three cycles after evt_end
    idle_latency_check = 1;
    crossing(60, 1, 0);
    repeat (30) @(posedge clk); #1;
    // 2) crossings of 54 candidates back to back (the next one accumulates
    //    while the previous one is read out)
    for (int k = 0; k < 8; k++) crossing(54, 1, (k == 3));
    repeat (30) @(posedge clk); #1;
    // 3) a crossing ending 4 cycles after the previous one: dropped
    crossing(20, 1, 0);
    crossing(4, 0, 0);
    repeat (30) @(posedge clk); #1;
    crossing(30, 1, 0);
    // 4) crossings ending every 18 cycles: the fastest rate the readout accepts
    for (int k = 0; k < 6; k++) crossing(18, 1, 0);
    repeat (60) @(posedge clk); #1;
    checks += 5;
    if (expq.size() != 0) begin failures++; $display("%0d images never read out", expq.size()); end
    if (n_overlap == 0) begin failures++; $display("no ping-pong overlap"); end
    if (n_drop != 1) begin failures++; $display("drops: %0d", n_drop); end
    if (n_sat == 0) begin failures++; $display("no saturation"); end
    if (n_images != 17) begin failures++; $display("images: %0d", n_images); end
    $display("images %0d overlap cycles %0d drops %0d saturations %0d", n_images, n_overlap, n_drop, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
