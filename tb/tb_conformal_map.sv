// tb_conformal_map: self-checking test of the conformal transformation.
//
// Drives random hits at detector-like radii (5-45 cm from the reference
// point, reference point itself random), plus hits very close to the
// reference point that must saturate, with random output stalls. Each result
// is compared with x' = (x-x0)/r^2 computed in floating point and scaled to
// Q.16; the hardware truncates, so it must lie within 1 LSB below the exact
// value's magnitude. `last` must pass through unchanged.
`timescale 1ns/1ps
module tb_conformal_map;
  import online_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t x0, y0, in_x, in_y, out_xp, out_yp;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  int checks = 0, failures = 0;

  conformal_map dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected Q.16 value (truncated toward zero) from real arithmetic
  function automatic longint expect_q16(real d, real r2);
    real v;
    v = d / r2 * 65536.0;
    if (v > 8388607.0) v = 8388607.0;
    if (v < -8388607.0) v = -8388607.0;
    return longint'($rtoi(v));
  endfunction

  task automatic check_one(real xr, real yr, bit lst, bit expect_sat);
    real dx, dy, r2;
    longint ex, ey;
    in_x = coord_t'($rtoi(xr * 256.0));
    in_y = coord_t'($rtoi(yr * 256.0));
    in_last = lst;
    @(negedge clk);
    in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
    // use the quantised inputs for the reference
    dx = real'(in_x - x0) / 256.0;
    dy = real'(in_y - y0) / 256.0;
    r2 = dx * dx + dy * dy;
    ex = expect_q16(dx, r2);
    ey = expect_q16(dy, r2);
    while (!(out_valid && out_ready)) @(negedge clk);
    checks++;
    if (expect_sat) begin
      if (!((out_xp == 24'sh7fffff || out_xp == -24'sh7fffff) ||
            (out_yp == 24'sh7fffff || out_yp == -24'sh7fffff))) begin
        failures++;
        $display("FAIL saturation: dx=%f dy=%f got %0d %0d", dx, dy, out_xp, out_yp);
      end
    end else if ((longint'(out_xp) - ex) > 1 || (ex - longint'(out_xp)) > 1 ||
                 (longint'(out_yp) - ey) > 1 || (ey - longint'(out_yp)) > 1 ||
                 out_last != lst) begin
      failures++;
      $display("FAIL dx=%f dy=%f: got (%0d,%0d,%0b) expected (%0d,%0d,%0b)",
               dx, dy, out_xp, out_yp, out_last, ex, ey, lst);
    end
    @(negedge clk);
  endtask

  // random output stalls
  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    real ang, rad;
    int t0, lat;
    in_valid = 0; in_x = '0; in_y = '0; in_last = 0;
    x0 = '0; y0 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fixed cases
    check_one(30.0, 0.0, 0, 0);
    check_one(0.0, -15.0, 1, 0);
    check_one(-20.0, 20.0, 0, 0);
    // random reference point and hits
    for (int n = 0; n < 300; n++) begin
      x0 = coord_t'($signed($urandom_range(0, 1024)) - 512);   // +-2 cm
      y0 = coord_t'($signed($urandom_range(0, 1024)) - 512);
      ang = real'($urandom_range(0, 62831)) / 10000.0;
      rad = 5.0 + real'($urandom_range(0, 40000)) / 1000.0;
      check_one(real'(x0) / 256.0 + rad * $cos(ang), real'(y0) / 256.0 + rad * $sin(ang),
                $urandom_range(0, 1) == 1, 0);
    end
    // a hit on the reference point saturates
    x0 = 24'sd2560; y0 = 24'sd2560;
    check_one(10.0, 10.0, 0, 1);
    // latency with the output always ready: accept to out_valid
    @(posedge clk);
    in_x = 24'sd7680; in_y = 24'sd0; in_last = 0; x0 = '0; y0 = '0;
    while (!in_ready) @(negedge clk);
    in_valid = 1;
    @(posedge clk); t0 = int'($time / 10);
    @(negedge clk); in_valid = 0;
    while (!out_valid) @(posedge clk);
    lat = int'($time / 10) - t0;
    checks++;
    if (lat != 50) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
    $display("latency %0d cycles", lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
