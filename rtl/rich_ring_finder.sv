// rich_ring_finder: track-seeded ring finder for the HADES RICH.
//
// Rather than scanning the whole pad plane, the ring finder looks for a ring
// only where a track says one should be. For each track seed it (1) looks up
// the pad the track points to on the pad plane (rich_coord_lut, the mirror
// transformation), (2) reads the 13 x 13 pads around that pad from the event's
// fired-pad bitmap (rich_pad_memory, 13 row reads), (3) searches them for a
// ring of radius 4 pads (rich_ring_match) and (4) reports the ring centre,
// its fired-pad count and whether it passed the threshold. This follows the
// published track-matched search; the seed format, the threshold and the
// one-seed-at-a-time sequencing are this design's choices.
//
// Interface: pad hits of an event through hit_valid/hit_col/hit_row after a
// one-clock `clear`; seeds through seed_valid/seed_ready with a 12-bit LUT
// index and an 8-bit track id; results through ring_valid/ring_ready.
// Timing: 18 clocks per seed from acceptance to ring_valid. Seeds must not be
// offered while the pads of their event are still being written.
module rich_ring_finder
  import online_pkg::*;
#(
  parameter int unsigned ROWS  = 96,
  parameter int unsigned COLS  = 96,
  parameter int unsigned IDX_W = 12,
  parameter int unsigned PAD_W = 7,
  parameter int unsigned CNT_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] threshold,
  // coordinate table writes (slow control)
  input  logic             cfg_we,
  input  logic [IDX_W-1:0] cfg_addr,
  input  logic [PAD_W-1:0] cfg_col,
  input  logic [PAD_W-1:0] cfg_row,
  // pad hits of the current event
  input  logic             clear,
  input  logic             hit_valid,
  input  logic [PAD_W-1:0] hit_col,
  input  logic [PAD_W-1:0] hit_row,
  // track seeds
  input  logic             seed_valid,
  output logic             seed_ready,
  input  logic [IDX_W-1:0] seed_idx,
  input  logic [7:0]       seed_id,
  // ring results
  output logic             ring_valid,
  input  logic             ring_ready,
  output logic [7:0]       ring_id,
  output logic             ring_found,
  output logic [CNT_W-1:0] ring_count,
  output logic [PAD_W-1:0] ring_col,
  output logic [PAD_W-1:0] ring_row
);
  localparam int unsigned HALF = (ROI_SIZE - 1) / 2;

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_READ, S_GAP, S_MATCH, S_WAIT, S_OUT} state_e;
  state_e state_q;

  logic             lk_valid, lk_out_valid;
  logic [PAD_W-1:0] lk_col, lk_row, c_col_q, c_row_q;
  logic [3:0]       i_q;
  logic             cap_q;
  logic [3:0]       cap_i_q;
  logic [ROI_SIZE-1:0][ROI_SIZE-1:0] roi_q;
  logic [ROI_SIZE-1:0] win;
  logic             m_valid, m_found;
  logic [CNT_W-1:0] m_count;
  logic signed [3:0] m_dx, m_dy;

  assign lk_valid   = (state_q == S_IDLE) && seed_valid;
  assign seed_ready = (state_q == S_IDLE);
  assign ring_valid = (state_q == S_OUT);

  rich_coord_lut #(.IDX_W(IDX_W), .PAD_W(PAD_W)) u_lut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_col, .cfg_row,
    .lk_valid, .lk_addr(seed_idx), .lk_out_valid, .lk_col, .lk_row
  );

  logic signed [PAD_W+1:0] rd_row, rd_col;
  assign rd_row = $signed({2'b00, c_row_q}) - (PAD_W+2)'(HALF) + $signed({{(PAD_W-2){1'b0}}, i_q});
  assign rd_col = $signed({2'b00, c_col_q}) - (PAD_W+2)'(HALF);

  rich_pad_memory #(.ROWS(ROWS), .COLS(COLS), .WIN(ROI_SIZE), .AW(PAD_W)) u_pads (
    .clk, .rst_n, .clear, .hit_valid, .hit_col, .hit_row,
    .rd_en(state_q == S_READ), .rd_row, .rd_col, .rd_data(win)
  );

  rich_ring_match #(.ROI(ROI_SIZE), .RAD(RING_RADIUS), .CNT_W(CNT_W)) u_match (
    .clk, .rst_n, .threshold, .in_valid(state_q == S_MATCH), .roi(roi_q),
    .out_valid(m_valid), .found(m_found), .count(m_count), .dx(m_dx), .dy(m_dy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      c_col_q <= '0; c_row_q <= '0; i_q <= '0; cap_q <= 1'b0; cap_i_q <= '0;
      roi_q <= '0; ring_id <= '0; ring_found <= 1'b0; ring_count <= '0;
      ring_col <= '0; ring_row <= '0;
    end else begin
      cap_q   <= (state_q == S_READ);
      cap_i_q <= i_q;
      if (cap_q) roi_q[cap_i_q] <= win;
      unique case (state_q)
        S_IDLE: if (seed_valid) begin
          ring_id <= seed_id;
          state_q <= S_LOOKUP;
        end
        S_LOOKUP: if (lk_out_valid) begin
          c_col_q <= lk_col;
          c_row_q <= lk_row;
          i_q     <= '0;
          state_q <= S_READ;
        end
        S_READ: begin
          i_q <= i_q + 1'b1;
          if (i_q == 4'(ROI_SIZE - 1)) state_q <= S_GAP;
        end
        S_GAP: begin
          state_q <= S_MATCH;     // last row lands in roi_q at the end of this clock
        end
        S_MATCH: state_q <= S_WAIT;
        S_WAIT: if (m_valid) begin
          ring_found <= m_found;
          ring_count <= m_count;
          ring_col   <= PAD_W'($signed({1'b0, c_col_q}) + m_dx);
          ring_row   <= PAD_W'($signed({1'b0, c_row_q}) + m_dy);
          state_q    <= S_OUT;
        end
        S_OUT: if (ring_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_ring_stable: assert property (@(posedge clk) disable iff (!rst_n)
      ring_valid && !ring_ready |=> ring_valid && $stable(ring_col) && $stable(ring_row));
endmodule
