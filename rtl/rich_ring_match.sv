// rich_ring_match: searches a 13 x 13 pad region of interest for a
// Cherenkov ring of fixed radius.
//
// Lepton rings in the HADES RICH have a fixed radius of 4 pads, and the
// region of interest is 13 x 13 pads centred on the pad a track points to.
// That leaves room for the ring centre to sit up to 2 pads off the region's
// centre in each direction (6 = 4 + 2), so this unit tries all 25 candidate
// centres in parallel. For each it counts the fired pads on the ring mask,
// the pads whose distance d from the candidate centre rounds to 4
// (12.25 <= d^2 < 20.25, 32 pads). The candidate with the most fired pads
// wins (ties: the first in row-major order from the top-left) and a ring is
// reported found when that count reaches `threshold`. The ROI size and the
// ring radius are the published numbers; the mask, the candidate search and
// the threshold are this design's choice (the published text gives only
// the function).
//
// Interface: `roi[row][col]` with row/col 0..12 and (6,6) the seed pad;
// result one clock after `in_valid`: `dx`,`dy` the offset of the best centre
// from the seed pad (-2..2), `count` its fired ring pads.
module rich_ring_match
  import online_pkg::*;
#(
  parameter int unsigned ROI = ROI_SIZE,
  parameter int unsigned RAD = RING_RADIUS,
  parameter int unsigned CNT_W = 6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [CNT_W-1:0]       threshold,
  input  logic                   in_valid,
  input  logic [ROI-1:0][ROI-1:0] roi,
  output logic                   out_valid,
  output logic                   found,
  output logic [CNT_W-1:0]       count,
  output logic signed [3:0]      dx,
  output logic signed [3:0]      dy
);
  localparam int HALF = (ROI - 1) / 2;        // 6
  localparam int MOFF = HALF - int'(RAD);     // 2
  localparam int R2LO = 4 * int'(RAD) * int'(RAD) - 4 * int'(RAD) + 1;  // (2R-1)^2, in quarter units
  localparam int R2HI = 4 * int'(RAD) * int'(RAD) + 4 * int'(RAD) + 1;  // (2R+1)^2

  // is offset (u, v) from a centre on the ring? (2u)^2+(2v)^2 in [(2R-1)^2, (2R+1)^2)
  function automatic bit on_ring(input int u, input int v);
    int q;
    q = 4 * (u * u + v * v);
    return (q >= R2LO) && (q < R2HI);
  endfunction

  logic [CNT_W-1:0]  best_cnt;
  logic signed [3:0] best_dx, best_dy;

  always_comb begin
    best_cnt = '0;
    best_dx  = '0;
    best_dy  = '0;
    for (int cy = -MOFF; cy <= MOFF; cy++) begin
      for (int cx = -MOFF; cx <= MOFF; cx++) begin
        logic [CNT_W-1:0] n;
        n = '0;
        for (int v = -int'(RAD); v <= int'(RAD); v++) begin
          for (int u = -int'(RAD); u <= int'(RAD); u++) begin
            if (on_ring(u, v))
              n = n + CNT_W'(roi[HALF + cy + v][HALF + cx + u]);
          end
        end
        if (n > best_cnt) begin
          best_cnt = n;
          best_dx  = 4'(cx);
          best_dy  = 4'(cy);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; found <= 1'b0; count <= '0; dx <= '0; dy <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        count <= best_cnt;
        dx    <= best_dx;
        dy    <= best_dy;
        found <= (best_cnt >= threshold) && (best_cnt != '0);
      end
    end
  end
endmodule
