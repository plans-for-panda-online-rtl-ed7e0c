// helix_track_finder: online track finder for helix tracks in a solenoid
// field, made of a conformal map, a Hough transform and a peak finder.
//
// Hits (x, y) of one event stream in; the last hit carries `in_last`.
// conformal_map turns each hit into (x', y') so that circles through the
// reference point (x0, y0) become straight lines; hough_accumulator lets
// every point vote along its sinusoid in the 512 x 512 (theta, r) histogram;
// once the event's last hit has voted, the histogram streams through
// hough_peak_finder, whose local maxima at or above `threshold` are the track
// candidates. Candidates wait in a FIFO for the consumer; if it is full a
// candidate is dropped and `peaks_dropped` counts it. The chain follows the
// published two-step algorithm; the FIFO and its depth are this design's.
//
// Timing: per hit 51 clocks in the conformal map, overlapped with 513
// clocks of voting, so the input rate is one hit per 513 clocks; after the
// last hit, the histogram read-out takes 512*512+5 clocks, then
// `event_done` pulses. Hits offered during the read-out wait (in_ready low
// once the conformal map holds one).
module helix_track_finder
  import online_pkg::*;
#(
  parameter int unsigned TB         = THETA_BINS,
  parameter int unsigned RB         = R_BINS,
  parameter int unsigned CNT_W      = 8,
  parameter int unsigned R_SHIFT    = 4,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  coord_t                x0,
  input  coord_t                y0,
  input  logic [CNT_W-1:0]      threshold,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  coord_t                in_x,
  input  coord_t                in_y,
  input  logic                  in_last,
  output logic                  peak_valid,
  input  logic                  peak_ready,
  output logic [$clog2(TB)-1:0] peak_theta,
  output logic [$clog2(RB)-1:0] peak_r,
  output logic [CNT_W-1:0]      peak_count,
  output logic                  event_done,
  output logic [31:0]           votes,
  output logic [31:0]           votes_saturated,
  output logic [31:0]           peaks_dropped
);
  localparam int unsigned TW = $clog2(TB);
  localparam int unsigned RW = $clog2(RB);
  localparam int unsigned PW = TW + RW + CNT_W;

  coord_t cm_x, cm_y;
  logic   cm_valid, cm_ready, cm_last;

  conformal_map u_conf (
    .clk, .rst_n, .x0, .y0,
    .in_valid, .in_ready, .in_x, .in_y, .in_last,
    .out_valid(cm_valid), .out_ready(cm_ready),
    .out_xp(cm_x), .out_yp(cm_y), .out_last(cm_last)
  );

  logic             h_valid, h_last;
  logic [TW-1:0]    h_theta;
  logic [RW-1:0]    h_r;
  logic [CNT_W-1:0] h_count;

  hough_accumulator #(.TB(TB), .RB(RB), .CNT_W(CNT_W), .R_SHIFT(R_SHIFT)) u_hough (
    .clk, .rst_n,
    .in_valid(cm_valid), .in_ready(cm_ready), .in_x(cm_x), .in_y(cm_y), .in_last(cm_last),
    .out_valid(h_valid), .out_theta(h_theta), .out_r(h_r), .out_count(h_count),
    .out_last(h_last), .votes, .saturated(votes_saturated)
  );

  logic             pf_valid;
  logic [TW-1:0]    pf_theta;
  logic [RW-1:0]    pf_r;
  logic [CNT_W-1:0] pf_count;

  hough_peak_finder #(.TB(TB), .RB(RB), .CNT_W(CNT_W)) u_peak (
    .clk, .rst_n, .threshold,
    .in_valid(h_valid), .in_theta(h_theta), .in_r(h_r), .in_count(h_count), .in_last(h_last),
    .peak_valid(pf_valid), .peak_theta(pf_theta), .peak_r(pf_r), .peak_count(pf_count),
    .frame_done(event_done)
  );

  logic fifo_in_ready;
  logic [$clog2(FIFO_DEPTH):0] fifo_level;

  sync_fifo #(.W(PW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(pf_valid), .in_ready(fifo_in_ready), .in_data({pf_theta, pf_r, pf_count}),
    .out_valid(peak_valid), .out_ready(peak_ready), .out_data({peak_theta, peak_r, peak_count}),
    .level(fifo_level)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) peaks_dropped <= '0;
    else if (pf_valid && !fifo_in_ready) peaks_dropped <= peaks_dropped + 1'b1;
  end
endmodule
