// tb_helix_track_finder: end-to-end test of the helix track finder with
// synthetic tracks.
//
// Event 1: 10 tracks from the origin in a 2 T field, transverse momenta
// 0.5-1.5 GeV/c (circle radius R = p_T / (0.3 * 2 T)), each with 7 hits at
// radii 3-14 cm (vertex detector) and 30 hits at 16-40 cm (straw tracker),
// 370 hits in all, 30 degrees or more apart in azimuth. A track's circle has
// its centre at R*(cos(phi), sin(phi)); in conformal space it is the line at
// distance 1/(2R) along the direction phi, so its peak must sit at
// theta bin phi*256/pi + 256 and r bin (1/(2R)) * 2^16 >> 4. A track counts
// as found when a peak lies within one bin of that cell in each direction.
// At least 8 of the 10 must be found, and no peak may lie more than 2 bins
// from every track (split peaks next to a track are tolerated: the angle
// binning spreads the votes of hits far out in conformal space).
// Checks the hit rate (one hit per 513 clocks) and the event time.
// Event 2: threshold 1 and the consumer stalled, so the 16-entry result
// FIFO overflows and `peaks_dropped` must count.
`timescale 1ns/1ps
module tb_helix_track_finder;
  import online_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t x0, y0, in_x, in_y;
  logic [7:0] threshold, peak_count;
  logic in_valid, in_ready, in_last, peak_valid, peak_ready, event_done;
  logic [8:0] peak_theta, peak_r;
  logic [31:0] votes, votes_saturated, peaks_dropped;
  int checks = 0, failures = 0;

  helix_track_finder dut (.*);

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NT = 10;
  real phi_c [NT], rad_c [NT];
  int  exp_t [NT], exp_r [NT];
  bit  found [NT];
  int  n_peaks, n_extra;
  localparam real PI = 3.14159265358979;

  task automatic send(real x, real y, bit lst);
    in_x = coord_t'($rtoi(x * 256.0));
    in_y = coord_t'($rtoi(y * 256.0));
    in_last = lst;
    in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  function automatic bit near(int t, int r, int k, int d);
    return t - exp_t[k] <= d && exp_t[k] - t <= d && r - exp_r[k] <= d && exp_r[k] - r <= d;
  endfunction

  // consume peaks and match them to tracks
  always @(posedge clk) begin
    if (rst_n && peak_valid && peak_ready && threshold > 1) begin
      automatic bit close = 0;
      n_peaks++;
      for (int k = 0; k < NT; k++) begin
        if (near(int'(peak_theta), int'(peak_r), k, 1)) found[k] = 1;
        if (near(int'(peak_theta), int'(peak_r), k, 2)) close = 1;
      end
      if (!close) n_extra++;
    end
  end

  initial begin
    real rho, s, ang, pt;
    int t_first, t_second, t_last, t_done, n_hits, n_found;
    in_valid = 0; in_x = '0; in_y = '0; in_last = 0; x0 = '0; y0 = '0;
    threshold = 8'd20; peak_ready = 1;
    n_peaks = 0; n_extra = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NT; k++) begin
      phi_c[k] = -2.7 + 0.55 * k + real'($urandom_range(0, 100)) / 1000.0;
      pt       = 0.5 + real'($urandom_range(0, 1000)) / 1000.0;
      rad_c[k] = pt / 0.6 * 100.0;                       // cm
      exp_t[k] = $rtoi(phi_c[k] * 256.0 / PI + 256.5);
      exp_r[k] = $rtoi(1.0 / (2.0 * rad_c[k]) * 65536.0 / 16.0);
      found[k] = 0;
    end
    // hits, track after track; each on its circle at distance rho from (0,0)
    n_hits = 0;
    for (int k = 0; k < NT; k++) begin
      s = (k % 2 == 0) ? 1.0 : -1.0;                    // charge sign
      for (int h = 0; h < 37; h++) begin
        rho = (h < 7) ? 3.0 + 11.0 * h / 6.0 : 16.0 + 24.0 * (h - 7) / 29.0;
        ang = phi_c[k] + s * $acos(rho / (2.0 * rad_c[k]));
        if (n_hits == 10) t_first = int'($time / 10);
        if (n_hits == 11) t_second = int'($time / 10);
        send(rho * $cos(ang), rho * $sin(ang), k == NT - 1 && h == 36);
        n_hits++;
      end
    end
    t_last = int'($time / 10);
    while (!event_done) @(negedge clk);
    t_done = int'($time / 10);
    repeat (20) @(negedge clk);
    n_found = 0;
    for (int k = 0; k < NT; k++) begin
      if (found[k]) n_found++;
      else $display("track %0d (theta bin %0d, r bin %0d) not found", k, exp_t[k], exp_r[k]);
    end
    checks++;
    if (n_found < 8) begin
      failures++;
      $display("FAIL only %0d of %0d tracks found", n_found, NT);
    end
    checks++;
    if (n_extra != 0) begin
      failures++;
      $display("FAIL %0d peaks away from every track", n_extra);
    end
    $display("tracks found %0d of %0d, peaks %0d, fakes %0d, votes %0d", n_found, NT, n_peaks, n_extra, votes);
    // rates: the accumulator takes a hit every 513 clocks; after the last
    // hit, 50 clocks of conformal map, 513 of voting, 4 of drain, 512*512
    // of read-out and the peak finder's 2
    checks++;
    if (t_second - t_first != 513) begin
      failures++;
      $display("FAIL hit period %0d", t_second - t_first);
    end
    checks++;
    if (t_done - t_last < 512 * 512 || t_done - t_last > 512 * 512 + 1200) begin
      failures++;
      $display("FAIL event tail %0d clocks", t_done - t_last);
    end
    $display("hit period %0d clocks, event tail %0d clocks", t_second - t_first, t_done - t_last);

    // ---- event 2: FIFO overflow with a stalled consumer
    threshold = 8'd1; peak_ready = 0;
    for (int h = 0; h < 40; h++)
      send(10.0 + $urandom_range(0, 3000) / 100.0, -20.0 + $urandom_range(0, 4000) / 100.0, h == 39);
    while (!event_done) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (peaks_dropped == 0 || !peak_valid) begin
      failures++;
      $display("FAIL overflow not seen: dropped %0d", peaks_dropped);
    end
    $display("dropped %0d peaks with the consumer stalled", peaks_dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
