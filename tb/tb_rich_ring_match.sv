// tb_rich_ring_match: random 13 x 13 regions of interest - rings of radius
// 4 pads at random centre offsets with missing pads, plus noise pads, and
// pure-noise regions - checked against a reference that counts, for every
// candidate centre within 2 pads of the middle, the fired pads whose
// Euclidean distance from it is within half a pad of 4 (floating point),
// and keeps the first best candidate in row-major order.
`timescale 1ns/1ps
module tb_rich_ring_match;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0] threshold, count;
  logic in_valid, out_valid, found;
  logic [12:0][12:0] roi;
  logic signed [3:0] dx, dy;
  int checks = 0, failures = 0;

  rich_ring_match dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best, bx, by, n, cx, cy, n_found;
    real d;
    in_valid = 0; roi = '0; threshold = 6'd12;
    repeat (3) @(negedge clk);
    rst_n = 1;
    n_found = 0;
    for (int it = 0; it < 400; it++) begin
      roi = '0;
      if (it % 4 != 3) begin          // a ring
        cx = $urandom_range(0, 4) - 2; cy = $urandom_range(0, 4) - 2;
        for (int r = 0; r < 13; r++)
          for (int c = 0; c < 13; c++) begin
            d = $sqrt(real'((c - 6 - cx) * (c - 6 - cx) + (r - 6 - cy) * (r - 6 - cy)));
            if (d >= 3.5 && d < 4.5 && $urandom_range(0, 99) < 70) roi[r][c] = 1'b1;
          end
      end
      for (int k = 0; k < 6; k++) roi[$urandom_range(0, 12)][$urandom_range(0, 12)] = 1'b1;
      // reference
      best = 0; bx = 0; by = 0;
      for (int oy = -2; oy <= 2; oy++)
        for (int ox = -2; ox <= 2; ox++) begin
          n = 0;
          for (int r = 0; r < 13; r++)
            for (int c = 0; c < 13; c++) begin
              d = $sqrt(real'((c - 6 - ox) * (c - 6 - ox) + (r - 6 - oy) * (r - 6 - oy)));
              if (roi[r][c] && d >= 3.5 && d < 4.5) n++;
            end
          if (n > best) begin best = n; bx = ox; by = oy; end
        end
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || int'(count) != best || int'(dx) != bx || int'(dy) != by ||
          found != (best >= 12)) begin
        failures++;
        $display("FAIL it=%0d got n=%0d (%0d,%0d) f=%0b expected n=%0d (%0d,%0d)",
                 it, count, dx, dy, found, best, bx, by);
      end
      if (found) n_found++;
    end
    $display("%0d of 400 regions with a ring found", n_found);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
