// tb_hough_peak_finder: streams synthetic 512 x 512 histograms through the
// peak finder and compares the reported peaks with a reference computed
// from the whole array: count >= threshold, strictly above the neighbours
// read earlier, not below those read later, last row/column excluded.
// Frame 1 is sparse random blobs with plateaus and a cell on the r = 0 edge;
// frame 2 is dense random noise, to exercise the line buffers everywhere.
`timescale 1ns/1ps
module tb_hough_peak_finder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] threshold, in_count, peak_count;
  logic in_valid, in_last, peak_valid, frame_done;
  logic [8:0] in_theta, in_r, peak_theta, peak_r;
  int checks = 0, failures = 0;

  hough_peak_finder dut (.*);

  initial begin : watchdog
    repeat (1200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int h [512][512];
  bit expect_pk [512][512];
  int n_expect, n_got, n_bad;

  function automatic int hcell(int t, int r);
    if (t < 0 || r < 0 || t > 511 || r > 511) return 0;
    return h[t][r];
  endfunction

  task automatic build_expect(int thr);
    int c;
    n_expect = 0;
    for (int t = 0; t < 511; t++)
      for (int r = 0; r < 511; r++) begin
        c = h[t][r];
        expect_pk[t][r] = (c >= thr) && (c != 0) &&
          c > hcell(t-1, r-1) && c > hcell(t-1, r) && c > hcell(t-1, r+1) && c > hcell(t, r-1) &&
          c >= hcell(t, r+1) && c >= hcell(t+1, r-1) && c >= hcell(t+1, r) && c >= hcell(t+1, r+1);
        if (expect_pk[t][r]) n_expect++;
      end
    for (int r = 0; r < 512; r++) expect_pk[511][r] = 0;
    for (int t = 0; t < 512; t++) expect_pk[t][511] = 0;
  endtask

  // collect peaks while a frame streams
  always @(posedge clk) begin
    if (rst_n && peak_valid) begin
      n_got++;
      if (!expect_pk[peak_theta][peak_r] || 32'(peak_count) != 32'(h[peak_theta][peak_r])) begin
        n_bad++;
        if (n_bad < 6) $display("FAIL unexpected peak t=%0d r=%0d c=%0d", peak_theta, peak_r, peak_count);
      end
    end
  end

  task automatic run_frame(int thr, string name);
    threshold = 8'(thr);
    build_expect(thr);
    n_got = 0; n_bad = 0;
    for (int t = 0; t < 512; t++)
      for (int r = 0; r < 512; r++) begin
        @(negedge clk);
        in_valid = 1; in_theta = 9'(t); in_r = 9'(r); in_count = 8'(h[t][r]);
        in_last = (t == 511 && r == 511);
        // random gaps in the stream
        if ($urandom_range(0, 7) == 0) begin
          @(negedge clk); in_valid = 0;
        end
      end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_bad != 0 || n_got != n_expect) begin
      failures++;
      $display("FAIL %s: %0d peaks, expected %0d, %0d wrong", name, n_got, n_expect, n_bad);
    end else $display("%s: %0d peaks as expected", name, n_got);
  endtask

  initial begin
    int tc, rc, pk;
    in_valid = 0; in_last = 0; in_theta = '0; in_r = '0; in_count = '0; threshold = 8'd10;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- frame 1: sparse blobs
    foreach (h[t, r]) h[t][r] = 0;
    for (int k = 0; k < 60; k++) begin
      tc = $urandom_range(1, 509); rc = $urandom_range(1, 509); pk = $urandom_range(5, 60);
      h[tc][rc] = pk;
      h[tc-1][rc] = pk / 2; h[tc+1][rc] = pk / 2; h[tc][rc+1] = pk / 3; h[tc][rc-1] = pk / 3;
    end
    h[100][200] = 30; h[100][201] = 30; h[101][200] = 30; h[101][201] = 30;   // plateau
    h[300][0] = 40;                                                           // r = 0 edge
    h[0][50] = 40;                                                            // theta = 0 edge
    run_frame(10, "sparse");
    // ---- frame 2: dense noise
    foreach (h[t, r]) h[t][r] = $urandom_range(0, 20);
    run_frame(18, "dense");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
