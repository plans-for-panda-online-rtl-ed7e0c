// hough_accumulator: Hough-transform voting into a 512 x 512 (theta, r)
// histogram, and read-out of that histogram for peak finding.
//
// Each conformal point (x', y') votes once per angle bin: for every theta
// bin t the unit computes r = x' cos(theta_t) + y' sin(theta_t) and
// increments the histogram cell (t, r). A point on a straight line through
// conformal space thus draws a sinusoid, and the sinusoids of all points of
// one track cross in the cell that holds the line's normal vector: r is the
// distance of the line from the origin, theta the polar angle of its normal.
// Because r is a distance it is never negative; a negative r belongs to the
// same line seen from theta + pi and is not voted. The 512 x 512 size, the
// sine table and the 48-bit product follow the published track finder; the
// r scaling (bin = r[Q.16] >> R_SHIFT: with R_SHIFT = 4, bins of 2^-12 1/cm
// and a full scale of 0.125 1/cm, i.e. circle radii down to 4 cm), the 8-bit
// saturating counters and the sequential angle sweep are this design's
// choices. Finer r bins sharpen the momentum but spread a track's votes over
// several cells, because an angle bin of pi/256 moves r by up to
// |x'| * pi/512 for points far from the line's foot point.
//
// After the hit flagged `in_last` has been voted, the histogram is streamed
// out in raster order (theta-major, r-minor), one cell per clock, and each
// cell is cleared as it is read, so the next event starts from an empty
// histogram. After reset the memory is cleared once (TB*RB cycles) before
// in_ready rises.
//
// Timing: one hit takes TB+1 clocks (one angle bin per clock); the voting
// pipeline is 3 deep (sine table, product, read-modify-write). The read-out
// of an event takes TB*RB+5 clocks. Two back-to-back votes never hit the
// same cell (they differ in theta), so the one-cycle read-modify-write needs
// no forwarding.
module hough_accumulator
  import online_pkg::*;
#(
  parameter int unsigned CW      = COORD_W,
  parameter int unsigned WW      = WIDE_W,
  parameter int unsigned TB      = THETA_BINS,
  parameter int unsigned RB      = R_BINS,
  parameter int unsigned CNT_W   = 8,
  parameter int unsigned FRAC    = CONF_FRAC,
  parameter int unsigned R_SHIFT = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // conformal points
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [CW-1:0] in_x,
  input  logic signed [CW-1:0] in_y,
  input  logic                 in_last,
  // histogram read-out stream (no back-pressure)
  output logic                          out_valid,
  output logic [$clog2(TB)-1:0]         out_theta,
  output logic [$clog2(RB)-1:0]         out_r,
  output logic [CNT_W-1:0]              out_count,
  output logic                          out_last,
  // statistics
  output logic [31:0]          votes,       // votes written
  output logic [31:0]          saturated    // votes lost to a full counter
);
  localparam int unsigned TW = $clog2(TB);
  localparam int unsigned RW = $clog2(RB);
  localparam int unsigned AW = TW + RW;
  localparam int unsigned SW = SIN_W + 2;

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_SWEEP, S_DRAIN, S_SCAN} state_e;
  state_e state_q;

  logic signed [CW-1:0] x_q, y_q;
  logic                 last_q;
  logic [TW-1:0]        t_q;
  logic [AW-1:0]        addr_q;      // init / scan address
  logic [2:0]           drain_q;

  // ---------------- histogram memory: 1 read + 1 write port ----------------
  logic [CNT_W-1:0] mem [TB*RB];
  logic             rd_en, we;
  logic [AW-1:0]    rd_addr, wa;
  logic [CNT_W-1:0] rdata_q, wd;

  always_ff @(posedge clk) begin
    if (rd_en) rdata_q <= mem[rd_addr];
    if (we)    mem[wa] <= wd;
  end

  // ---------------- voting pipeline ----------------
  logic signed [SW-1:0] sin_v, cos_v;
  logic                 v1_q, v2_q;
  logic [TW-1:0]        t1_q;
  logic signed [WW-1:0] acc_q;
  logic [AW-1:0]        a2_q;
  logic signed [WW-1:0] r_fix;
  logic                 r_ok;
  logic [RW-1:0]        r_bin;

  sine_lut #(.ENTRIES(TB/4), .VW(SIN_W), .TW(TW)) u_sin (
    .clk, .theta(t_q), .sin_o(sin_v), .cos_o(cos_v)
  );

  logic issue;        // angle bin presented to the sine table this cycle
  logic v0_q;         // its table output is valid in the next cycle
  logic [TW-1:0] t0_q;
  assign issue = (state_q == S_SWEEP);

  // r in Q.FRAC, then the bin index; only 0 <= r < RB bins are voted
  assign r_fix = acc_q >>> FRAC;
  assign r_ok  = !acc_q[WW-1] && ((r_fix >>> R_SHIFT) < WW'(RB));
  assign r_bin = RW'(r_fix >>> R_SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0_q <= 1'b0; v1_q <= 1'b0; v2_q <= 1'b0;
      t0_q <= '0; t1_q <= '0; acc_q <= '0; a2_q <= '0;
    end else begin
      v0_q <= issue;
      t0_q <= t_q;
      // stage 1: 24 x 18 bit products, summed on 48 bits
      v1_q  <= v0_q;
      t1_q  <= t0_q;
      acc_q <= WW'(x_q) * WW'(cos_v) + WW'(y_q) * WW'(sin_v);
      // stage 2: cell read
      v2_q <= v1_q && r_ok;
      a2_q <= {t1_q, r_bin};
    end
  end

  // ---------------- memory port control ----------------
  logic scan_rd;
  assign scan_rd = (state_q == S_SCAN);
  always_comb begin
    rd_en   = (v1_q && r_ok) || scan_rd;
    rd_addr = scan_rd ? addr_q : {t1_q, r_bin};
    we = 1'b0; wa = a2_q; wd = '0;
    if (state_q == S_INIT) begin
      we = 1'b1; wa = addr_q; wd = '0;
    end else if (out_valid) begin           // clear-on-read during the scan
      we = 1'b1; wa = {out_theta, out_r}; wd = '0;
    end else if (v2_q) begin                // saturating increment
      we = 1'b1; wa = a2_q;
      wd = (rdata_q == '1) ? rdata_q : rdata_q + 1'b1;
    end
  end

  // ---------------- control ----------------
  assign in_ready = (state_q == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_INIT;
      addr_q <= '0; t_q <= '0; drain_q <= '0;
      x_q <= '0; y_q <= '0; last_q <= 1'b0;
      out_valid <= 1'b0; out_last <= 1'b0; out_theta <= '0; out_r <= '0;
      votes <= '0; saturated <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (v2_q && state_q != S_INIT) begin
        if (rdata_q == '1) saturated <= saturated + 1'b1;
        else               votes     <= votes + 1'b1;
      end
      unique case (state_q)
        S_INIT: begin
          addr_q <= addr_q + 1'b1;
          if (addr_q == AW'(TB*RB-1)) state_q <= S_IDLE;
        end
        S_IDLE: if (in_valid) begin
          x_q <= in_x; y_q <= in_y; last_q <= in_last;
          t_q <= '0;
          state_q <= S_SWEEP;
        end
        S_SWEEP: begin
          t_q <= t_q + 1'b1;
          if (t_q == TW'(TB-1)) begin
            if (last_q) begin
              drain_q <= 3'd4;
              state_q <= S_DRAIN;
            end else begin
              state_q <= S_IDLE;
            end
          end
        end
        S_DRAIN: begin
          drain_q <= drain_q - 1'b1;
          if (drain_q == 3'd1) begin
            addr_q  <= '0;
            state_q <= S_SCAN;
          end
        end
        S_SCAN: begin
          // read issued this cycle, data and output next cycle
          out_valid <= 1'b1;
          {out_theta, out_r} <= addr_q;
          out_last  <= (addr_q == AW'(TB*RB-1));
          addr_q    <= addr_q + 1'b1;
          if (addr_q == AW'(TB*RB-1)) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign out_count = rdata_q;

  a_no_vote_while_scanning: assert property (@(posedge clk) disable iff (!rst_n)
      state_q == S_SCAN |-> !v2_q);
endmodule
