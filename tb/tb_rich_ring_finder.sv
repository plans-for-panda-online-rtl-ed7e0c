// tb_rich_ring_finder: track-seeded ring search over a whole event.
//
// The coordinate table maps seed index i to a pad chosen by the testbench.
// Each event writes complete rings (32 pads, radius 4) around some of the
// seed pads, shifted by up to 2 pads, plus noise pads, then offers all
// seeds. Seeds with a ring must report found, the true centre and the number of ring pads on the plane;
// seeds whose region is empty must report not found. Includes a ring whose
// region hangs over the plane edge, and a second event after `clear`, where
// the first event's rings must be gone. Checks 18 clocks from seed to result.
`timescale 1ns/1ps
module tb_rich_ring_finder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0] threshold, ring_count;
  logic cfg_we, clear, hit_valid, seed_valid, seed_ready, ring_valid, ring_ready, ring_found;
  logic [11:0] cfg_addr, seed_idx;
  logic [6:0] cfg_col, cfg_row, hit_col, hit_row, ring_col, ring_row;
  logic [7:0] seed_id, ring_id;
  int checks = 0, failures = 0;

  rich_ring_finder dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NS = 12;
  int sc [NS], sr [NS], ox [NS], oy [NS];
  bit has [NS];

  task automatic put_pad(int c, int r);
    if (c < 0 || r < 0 || c > 95 || r > 95) return;
    hit_col = 7'(c); hit_row = 7'(r); hit_valid = 1;
    @(negedge clk);
    hit_valid = 0;
  endtask

  task automatic put_ring(int c0, int r0);
    for (int v = -4; v <= 4; v++)
      for (int u = -4; u <= 4; u++)
        if (4 * (u * u + v * v) >= 49 && 4 * (u * u + v * v) < 81) put_pad(c0 + u, r0 + v);
  endtask

  // ring pads that land on the plane
  function automatic int on_plane(int c0, int r0);
    int n = 0;
    for (int v = -4; v <= 4; v++)
      for (int u = -4; u <= 4; u++)
        if (4 * (u * u + v * v) >= 49 && 4 * (u * u + v * v) < 81 &&
            c0 + u >= 0 && r0 + v >= 0 && c0 + u < 96 && r0 + v < 96) n++;
    return n;
  endfunction

  task automatic run_event(int ev);
    int t0, lat, want;
    clear = 1; @(negedge clk); clear = 0;
    for (int s = 0; s < NS; s++) if (has[s]) put_ring(sc[s] + ox[s], sr[s] + oy[s]);
    // noise far from the seeds' regions
    for (int k = 0; k < 10; k++) put_pad(48 + $urandom_range(0, 3), 48 + $urandom_range(0, 3));
    for (int s = 0; s < NS; s++) begin
      seed_idx = 12'(100 + s); seed_id = 8'(s); seed_valid = 1;
      while (!seed_ready) @(negedge clk);
      @(posedge clk); t0 = int'($time / 10);
      @(negedge clk); seed_valid = 0;
      while (!ring_valid) @(negedge clk);
      lat = int'($time / 10) - t0;
      checks++;
      want = on_plane(sc[s] + ox[s], sr[s] + oy[s]);
      if (has[s]) begin
        if (!ring_found || int'(ring_col) != sc[s] + ox[s] || int'(ring_row) != sr[s] + oy[s] ||
            int'(ring_count) != want || ring_id != 8'(s)) begin
          failures++;
          $display("FAIL ev%0d seed %0d: found=%0b (%0d,%0d) n=%0d, expected (%0d,%0d) n=%0d",
                   ev, s, ring_found, ring_col, ring_row, ring_count, sc[s] + ox[s], sr[s] + oy[s], want);
        end
      end else if (ring_found) begin
        failures++;
        $display("FAIL ev%0d seed %0d: ring found where there is none", ev, s);
      end
      checks++;
      if (lat != 18) begin
        failures++;
        $display("FAIL latency %0d", lat);
      end
      // hold the result for a clock to exercise back-pressure
      ring_ready = 0; @(negedge clk); ring_ready = 1; @(negedge clk);
    end
  endtask

  initial begin
    cfg_we = 0; clear = 0; hit_valid = 0; seed_valid = 0; ring_ready = 1; threshold = 6'd20;
    cfg_addr = '0; cfg_col = '0; cfg_row = '0; hit_col = '0; hit_row = '0; seed_idx = '0; seed_id = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // seeds on a 4 x 3 grid 20 pads apart; seed 0 at the plane corner
    for (int s = 0; s < NS; s++) begin
      sc[s] = (s == 0) ? 3 : 10 + 20 * (s % 4);
      sr[s] = (s == 0) ? 2 : 15 + 25 * (s / 4);
      cfg_we = 1; cfg_addr = 12'(100 + s); cfg_col = 7'(sc[s]); cfg_row = 7'(sr[s]);
      @(negedge clk);
    end
    cfg_we = 0;
    for (int ev = 0; ev < 2; ev++) begin
      for (int s = 0; s < NS; s++) begin
        has[s] = ((s + ev) % 3 != 0);
        ox[s] = $urandom_range(0, 4) - 2; oy[s] = $urandom_range(0, 4) - 2;
      end
      run_event(ev);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
