// tb_hough_accumulator: checks the Hough voting and the histogram read-out.
//
// Event 1: random conformal points; the whole 512 x 512 read-out is
// compared cell by cell with a histogram the testbench builds itself from
// floating-point sine values (rounded to 16 bits as the table specifies)
// and the same r binning (r >= 0, bin = r >> 20 on the Q.32 product).
// Event 2: 300 copies of one point, so its cells saturate at 255; the
// read-out must also show that event 1 was cleared. Checks the hit rate of
// 513 clocks per hit and the read-out length of 512*512 clocks.
`timescale 1ns/1ps
module tb_hough_accumulator;
  import online_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_last, out_valid, out_last;
  coord_t in_x, in_y;
  logic [8:0] out_theta, out_r;
  logic [7:0] out_count;
  logic [31:0] votes, saturated;
  int checks = 0, failures = 0;

  hough_accumulator dut (.*);

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sin_t [512], cos_t [512];
  int unsigned expect_h [512*512];
  int unsigned seen_cells, bad_cells, out_cycles;
  longint expect_votes;

  function automatic int rnd16(real v);
    return $rtoi(v * 65536.0 + (v >= 0 ? 0.5 : -0.5));
  endfunction

  task automatic vote_model(int x, int y);
    longint acc;
    for (int t = 0; t < 512; t++) begin
      acc = longint'(x) * cos_t[t] + longint'(y) * sin_t[t];
      if (acc >= 0 && (acc >>> 20) < 512) begin
        if (expect_h[t*512 + int'(acc >>> 20)] < 255) begin
          expect_h[t*512 + int'(acc >>> 20)]++;
          expect_votes++;
        end
      end
    end
  endtask

  task automatic send(int x, int y, bit lst);
    in_x = coord_t'(x); in_y = coord_t'(y); in_last = lst;
    in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  // compare the read-out with the model, cell by cell
  task automatic check_readout();
    seen_cells = 0; bad_cells = 0; out_cycles = 0;
    while (!out_valid) @(negedge clk);
    forever begin
      out_cycles++;
      if (out_valid) begin
        if (32'(out_count) != expect_h[int'(out_theta)*512 + int'(out_r)] ||
            int'({out_theta, out_r}) != int'(seen_cells)) begin
          if (bad_cells < 5)
            $display("FAIL cell t=%0d r=%0d got %0d expected %0d", out_theta, out_r,
                     out_count, expect_h[int'(out_theta)*512 + int'(out_r)]);
          bad_cells++;
        end
        seen_cells++;
      end
      if (out_valid && out_last) break;
      @(negedge clk);
    end
    checks++;
    if (bad_cells != 0 || seen_cells != 512*512 || out_cycles != 512*512) begin
      failures++;
      $display("FAIL readout: %0d bad cells, %0d cells in %0d clocks", bad_cells, seen_cells, out_cycles);
    end
  endtask

  initial begin
    int px [40], py [40];
    int t0, t1;
    real a;
    for (int t = 0; t < 512; t++) begin
      a = real'(t - 256) * 3.14159265358979 / 256.0;
      sin_t[t] = rnd16($sin(a));
      cos_t[t] = rnd16($cos(a));
    end
    in_valid = 0; in_x = '0; in_y = '0; in_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- event 1: 40 random points within |x'|,|y'| < 0.1 /cm
    foreach (expect_h[i]) expect_h[i] = 0;
    expect_votes = 0;
    for (int n = 0; n < 40; n++) begin
      px[n] = int'($urandom_range(0, 13106)) - 6553;
      py[n] = int'($urandom_range(0, 13106)) - 6553;
    end
    // three points of a straight line at distance 0.05 from the origin
    for (int n = 0; n < 3; n++) begin
      a = -0.1 + 0.1 * n;
      px[n] = $rtoi((0.05 * $cos(0.7) - a * $sin(0.7)) * 65536.0);
      py[n] = $rtoi((0.05 * $sin(0.7) + a * $cos(0.7)) * 65536.0);
    end
    // rebuild the model with the final point list
    foreach (expect_h[i]) expect_h[i] = 0;
    expect_votes = 0;
    for (int n = 0; n < 40; n++) vote_model(px[n], py[n]);
    while (!in_ready) @(negedge clk);
    for (int n = 0; n < 40; n++) begin
      if (n == 1) t0 = int'($time / 10);
      if (n == 2) t1 = int'($time / 10);
      send(px[n], py[n], n == 39);
    end
    checks++;
    if (t1 - t0 != 513) begin
      failures++;
      $display("FAIL hit period %0d clocks", t1 - t0);
    end
    check_readout();
    checks++;
    if (longint'(votes) != expect_votes || saturated != 0) begin
      failures++;
      $display("FAIL votes %0d expected %0d, saturated %0d", votes, expect_votes, saturated);
    end
    // ---- event 2: saturation, and the clear of event 1
    foreach (expect_h[i]) expect_h[i] = 0;
    expect_votes = 0;
    for (int n = 0; n < 300; n++) begin
      vote_model(300, 200);
      send(300, 200, n == 299);
    end
    check_readout();
    checks++;
    if (saturated == 0) begin
      failures++;
      $display("FAIL no saturation counted");
    end
    $display("votes=%0d saturated=%0d", votes, saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
