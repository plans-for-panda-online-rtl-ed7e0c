// compute_node: the online-reconstruction logic of one Compute Node board.
//
// A Compute Node carries five FPGAs linked point to point: four processor
// FPGAs run the reconstruction algorithms on data arriving over optical
// links, and the fifth is a router whose 16 backplane links reach every
// other board of an ATCA shelf. This module joins the algorithm engines
// to the router the way the board joins the FPGAs:
//
//   processor 0  helix_track_finder   hits -> Hough track candidates
//   processor 1  rich_ring_finder     RICH pads + track seeds -> rings
//   processor 2  cherenkov_angle_lut + pid_decision
//                                     (ring radius, z, p) -> species
//   processor 3  event_selector       DDR2 events -> accepted events
//   router       cn_router            16 backplane + 4 processor ports
//
// Every engine turns each result into a one-flit packet (tag in data[31:28],
// see online_pkg::result_tag_e) addressed to a configurable router port, so
// results can leave the board over the backplane or go to another processor.
// Which algorithm runs on which processor FPGA, the flit formats and the
// result packets are this design's choices; the engines, the 16 backplane
// links and the five-FPGA layout follow the published description. The
// serial transceivers, the DDR2 memory, the PowerPC slow-control cores and
// Gigabit Ethernet are outside this RTL: their data sides are ports here
// (optical-link data as the engines' input streams, slow control as the
// cfg_* ports, DDR2 as the mem_* port, processor receive sides as pf_rx_*).
// All of it runs on one clock with an active-low asynchronous reset.
module compute_node
  import online_pkg::*;
(
  input  logic clk,
  input  logic rst_n,

  // ---- backplane links (router ports 0..15)
  input  logic  [BACKPLANE_LINKS-1:0] bp_in_valid,
  output logic  [BACKPLANE_LINKS-1:0] bp_in_ready,
  input  flit_t [BACKPLANE_LINKS-1:0] bp_in_flit,
  output logic  [BACKPLANE_LINKS-1:0] bp_out_valid,
  input  logic  [BACKPLANE_LINKS-1:0] bp_out_ready,
  output flit_t [BACKPLANE_LINKS-1:0] bp_out_flit,
  // ---- router to processor FPGAs (router ports 16..19, receive side)
  output logic  [PROC_FPGAS-1:0]      pf_rx_valid,
  input  logic  [PROC_FPGAS-1:0]      pf_rx_ready,
  output flit_t [PROC_FPGAS-1:0]      pf_rx_flit,
  // ---- result destinations (router port per processor FPGA)
  input  logic [PROC_FPGAS-1:0][DEST_W-1:0] result_dest,

  // ---- processor 0: helix track finder
  input  coord_t     trk_x0,
  input  coord_t     trk_y0,
  input  logic [7:0] trk_threshold,
  input  logic       hit_valid,
  output logic       hit_ready,
  input  coord_t     hit_x,
  input  coord_t     hit_y,
  input  logic       hit_last,
  output logic       trk_event_done,

  // ---- processor 1: RICH ring finder
  input  logic [5:0]  ring_threshold,
  input  logic        rlut_we,
  input  logic [11:0] rlut_addr,
  input  logic [6:0]  rlut_col,
  input  logic [6:0]  rlut_row,
  input  logic        pad_clear,
  input  logic        pad_valid,
  input  logic [6:0]  pad_col,
  input  logic [6:0]  pad_row,
  input  logic        seed_valid,
  output logic        seed_ready,
  input  logic [11:0] seed_idx,
  input  logic [7:0]  seed_id,

  // ---- processor 2: Cherenkov angle and PID
  input  logic        clut_we,
  input  logic [6:0]  clut_r,
  input  logic [6:0]  clut_z,
  input  logic [15:0] clut_angle,
  input  logic        ptab_we,
  input  logic [5:0]  ptab_pbin,
  input  logic [5:0]  ptab_abin,
  input  species_e    ptab_species,
  input  logic        pid_valid,
  output logic        pid_ready,
  input  logic [6:0]  pid_ring_r,
  input  logic [6:0]  pid_z,
  input  logic [15:0] pid_p,
  input  logic [7:0]  pid_id,

  // ---- processor 3: event selector and its DDR2 port
  input  logic        sel_start,
  input  logic [31:0] sel_src_base,
  input  logic [31:0] sel_src_words,
  input  logic [31:0] sel_dst_base,
  input  logic [31:0] sel_acc_mask,
  input  logic [31:0] sel_acc_value,
  output logic        sel_busy,
  output logic        sel_done,
  output logic        mem_req,
  output logic        mem_we,
  output logic [31:0] mem_addr,
  output logic [31:0] mem_wdata,
  input  logic        mem_gnt,
  input  logic        mem_rvalid,
  input  logic [31:0] mem_rdata,

  // ---- statistics
  output logic [31:0] stat_votes,
  output logic [31:0] stat_votes_saturated,
  output logic [31:0] stat_peaks_dropped,
  output logic [31:0] stat_router_contentions,
  output logic [31:0] stat_sel_accepted,
  output logic [31:0] stat_sel_seen,
  output logic [31:0] stat_sel_reloads,
  output logic [31:0] stat_sel_flushes,
  output logic        stat_sel_error
);
  localparam int unsigned N = ROUTER_PORTS;

  logic  [N-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t [N-1:0] r_in_flit, r_out_flit;
  logic  [PROC_FPGAS-1:0] pf_tx_valid, pf_tx_ready;
  flit_t [PROC_FPGAS-1:0] pf_tx_flit;

  // ================= processor 0: helix track finder =================
  logic       pk_valid;
  logic [8:0] pk_theta, pk_r;
  logic [7:0] pk_count;

  helix_track_finder u_track (
    .clk, .rst_n, .x0(trk_x0), .y0(trk_y0), .threshold(trk_threshold),
    .in_valid(hit_valid), .in_ready(hit_ready), .in_x(hit_x), .in_y(hit_y), .in_last(hit_last),
    .peak_valid(pk_valid), .peak_ready(pf_tx_ready[0]),
    .peak_theta(pk_theta), .peak_r(pk_r), .peak_count(pk_count),
    .event_done(trk_event_done), .votes(stat_votes),
    .votes_saturated(stat_votes_saturated), .peaks_dropped(stat_peaks_dropped)
  );
  assign pf_tx_valid[0] = pk_valid;
  assign pf_tx_flit[0]  = '{dest: result_dest[0], last: 1'b1,
                            data: {TAG_TRACK, 2'b00, pk_theta, pk_r, pk_count}};

  // ================= processor 1: RICH ring finder =================
  logic       rg_valid, rg_found;
  logic [7:0] rg_id;
  logic [5:0] rg_count;
  logic [6:0] rg_col, rg_row;

  rich_ring_finder u_ring (
    .clk, .rst_n, .threshold(ring_threshold),
    .cfg_we(rlut_we), .cfg_addr(rlut_addr), .cfg_col(rlut_col), .cfg_row(rlut_row),
    .clear(pad_clear), .hit_valid(pad_valid), .hit_col(pad_col), .hit_row(pad_row),
    .seed_valid, .seed_ready, .seed_idx, .seed_id,
    .ring_valid(rg_valid), .ring_ready(pf_tx_ready[1]), .ring_id(rg_id),
    .ring_found(rg_found), .ring_count(rg_count), .ring_col(rg_col), .ring_row(rg_row)
  );
  assign pf_tx_valid[1] = rg_valid;
  assign pf_tx_flit[1]  = '{dest: result_dest[1], last: 1'b1,
                            data: {TAG_RING, rg_found, rg_count, rg_row, rg_col, rg_id[6:0]}};

  // ================= processor 2: Cherenkov angle + PID =================
  logic        ca_valid, pd_valid;
  logic [15:0] ca_angle;
  logic [23:0] ca_tag;
  species_e    pd_species;
  logic [7:0]  pd_id;
  logic [4:0]  pq_level;
  logic        pq_in_ready;

  cherenkov_angle_lut #(.TAG_W(24)) u_clut (
    .clk, .rst_n, .cfg_we(clut_we), .cfg_r(clut_r), .cfg_z(clut_z), .cfg_angle(clut_angle),
    .in_valid(pid_valid && pid_ready), .in_r(pid_ring_r), .in_z(pid_z), .in_tag({pid_id, pid_p}),
    .out_valid(ca_valid), .out_angle(ca_angle), .out_tag(ca_tag)
  );

  pid_decision u_pid (
    .clk, .rst_n, .cfg_we(ptab_we), .cfg_pbin(ptab_pbin), .cfg_abin(ptab_abin),
    .cfg_species(ptab_species),
    .in_valid(ca_valid), .in_p(ca_tag[15:0]), .in_angle(ca_angle), .in_id(ca_tag[23:16]),
    .out_valid(pd_valid), .out_species(pd_species), .out_id(pd_id)
  );

  // results wait here for the router; the two-stage pipeline above needs
  // room for two results in flight, so new inputs stop 3 entries early
  sync_fifo #(.W(11), .DEPTH(16)) u_pid_fifo (
    .clk, .rst_n,
    .in_valid(pd_valid), .in_ready(pq_in_ready), .in_data({pd_id, pd_species}),
    .out_valid(pf_tx_valid[2]), .out_ready(pf_tx_ready[2]),
    .out_data(pf_tx_flit[2].data[10:0]), .level(pq_level)
  );
  assign pid_ready = (pq_level < 5'd13);

  a_pid_fifo_room: assert property (@(posedge clk) disable iff (!rst_n)
      pd_valid |-> pq_in_ready);
  assign pf_tx_flit[2].data[31:11] = {TAG_PID, 17'd0};
  assign pf_tx_flit[2].dest = result_dest[2];
  assign pf_tx_flit[2].last = 1'b1;

  // ================= processor 3: event selector =================
  logic        sel_done_i, sel_err;
  logic [31:0] sel_acc, sel_words;
  logic        sum_pending_q;

  event_selector u_sel (
    .clk, .rst_n, .start(sel_start), .src_base(sel_src_base), .src_words(sel_src_words),
    .dst_base(sel_dst_base), .acc_mask(sel_acc_mask), .acc_value(sel_acc_value),
    .busy(sel_busy), .done(sel_done_i), .error(sel_err),
    .events_seen(stat_sel_seen), .events_accepted(sel_acc), .words_written(sel_words),
    .reloads(stat_sel_reloads), .flushes(stat_sel_flushes),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata
  );
  assign sel_done          = sel_done_i;
  assign stat_sel_accepted = sel_acc;
  assign stat_sel_error    = sel_err;

  // one summary packet per run: accepted event count and the error flag,
  // captured at `done` so that a new run may start before it is sent
  logic [24:0] sum_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_pending_q <= 1'b0;
      sum_q <= '0;
    end else if (sel_done_i) begin
      sum_pending_q <= 1'b1;
      sum_q <= {sel_acc[23:0], sel_err};
    end else if (pf_tx_ready[3]) begin
      sum_pending_q <= 1'b0;
    end
  end
  assign pf_tx_valid[3] = sum_pending_q;
  assign pf_tx_flit[3]  = '{dest: result_dest[3], last: 1'b1,
                            data: {TAG_EVSEL, sum_q, 3'b000}};

  // ================= router FPGA =================
  assign r_in_valid  = {pf_tx_valid, bp_in_valid};
  assign r_in_flit   = {pf_tx_flit, bp_in_flit};
  assign {pf_tx_ready, bp_in_ready} = r_in_ready;
  assign {pf_rx_valid, bp_out_valid} = r_out_valid;
  assign {pf_rx_flit, bp_out_flit}   = r_out_flit;
  assign r_out_ready = {pf_rx_ready, bp_out_ready};

  cn_router u_router (
    .clk, .rst_n,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_flit(r_in_flit),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_flit(r_out_flit),
    .contentions(stat_router_contentions)
  );
endmodule
