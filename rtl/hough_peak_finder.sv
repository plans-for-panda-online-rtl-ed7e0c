// hough_peak_finder: finds track candidates as local maxima of the Hough
// histogram while the histogram streams past in raster order.
//
// A cell is reported when its count reaches `threshold` and it is the
// maximum of its 3 x 3 neighbourhood. Plateaus are resolved by scan order:
// the cell must be strictly greater than the four neighbours read before it
// and at least equal to the four read after it, so exactly one cell of a
// flat-topped peak is reported. Two line buffers hold the previous two theta
// rows; a 3 x 3 window of registers slides along r. Cells outside the
// histogram count as empty; the angle axis is not wrapped, and cells in the
// last r column or last theta row are never reported (their window is
// incomplete). The published track finder says only that a peak finder runs
// on the histogram and that a peak is a track; the 3 x 3 local-maximum rule
// and the threshold are this design's choice.
//
// Interface: histogram cells in (in_valid, theta, r, count, last; one per
// clock, no back-pressure), peaks out as single-cycle pulses two clocks after
// the cell right-below the peak arrives. `frame_done` pulses with the last
// cell's result.
module hough_peak_finder
  import online_pkg::*;
#(
  parameter int unsigned TB    = THETA_BINS,
  parameter int unsigned RB    = R_BINS,
  parameter int unsigned CNT_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CNT_W-1:0]      threshold,
  input  logic                  in_valid,
  input  logic [$clog2(TB)-1:0] in_theta,
  input  logic [$clog2(RB)-1:0] in_r,
  input  logic [CNT_W-1:0]      in_count,
  input  logic                  in_last,
  output logic                  peak_valid,
  output logic [$clog2(TB)-1:0] peak_theta,
  output logic [$clog2(RB)-1:0] peak_r,
  output logic [CNT_W-1:0]      peak_count,
  output logic                  frame_done
);
  localparam int unsigned TW = $clog2(TB);
  localparam int unsigned RW = $clog2(RB);

  logic [CNT_W-1:0] lb1 [RB];   // row theta-1
  logic [CNT_W-1:0] lb2 [RB];   // row theta-2
  logic [CNT_W-1:0] w [3][3];   // [row: theta-2, theta-1, theta][col: r-2, r-1, r]
  logic             v_q, last_q;
  logic [TW-1:0]    t_q;
  logic [RW-1:0]    r_q;

  // line buffers and window shift
  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb2[in_r] <= lb1[in_r];
      lb1[in_r] <= in_count;
      for (int i = 0; i < 3; i++) begin
        w[i][0] <= w[i][1];
        w[i][1] <= w[i][2];
      end
      w[0][2] <= (in_theta >= TW'(2)) ? lb2[in_r] : '0;
      w[1][2] <= (in_theta >= TW'(1)) ? lb1[in_r] : '0;
      w[2][2] <= in_count;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; last_q <= 1'b0; t_q <= '0; r_q <= '0;
    end else begin
      v_q    <= in_valid;
      last_q <= in_valid && in_last;
      if (in_valid) begin
        t_q <= in_theta;
        r_q <= in_r;
      end
    end
  end

  // evaluate the centre cell (t_q-1, r_q-1) of the registered window
  logic [CNT_W-1:0] c, nw, n, ne, wl, e, sw, s, se;
  logic             left_ok, is_peak;
  always_comb begin
    left_ok = (r_q >= RW'(2));
    c  = w[1][1];
    nw = left_ok ? w[0][0] : '0;  n = w[0][1];  ne = w[0][2];
    wl = left_ok ? w[1][0] : '0;                e  = w[1][2];
    sw = left_ok ? w[2][0] : '0;  s = w[2][1];  se = w[2][2];
    is_peak = v_q && (t_q >= TW'(1)) && (r_q >= RW'(1)) &&
              (c >= threshold) && (c != '0) &&
              (c > nw) && (c > n) && (c > ne) && (c > wl) &&
              (c >= e) && (c >= sw) && (c >= s) && (c >= se);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      peak_valid <= 1'b0; peak_theta <= '0; peak_r <= '0; peak_count <= '0;
      frame_done <= 1'b0;
    end else begin
      peak_valid <= is_peak;
      frame_done <= last_q;
      if (is_peak) begin
        peak_theta <= t_q - 1'b1;
        peak_r     <= r_q - 1'b1;
        peak_count <= c;
      end
    end
  end
endmodule
