// online_pkg: types and constants shared by the online-reconstruction blocks
// of the Compute Node (helix track finder, RICH ring finder, PID chain, event
// selector and the board router).
//
// Numbers that come from the published description: 24-bit fixed-point
// coordinates widened to 48 bits in multiply and divide, a 512 x 512 Hough
// space, a 128-entry 16-bit sine table, a 13 x 13 pad region of interest,
// a ring radius of 4 pads, a 32 kB DMA block, 16 backplane links and five
// FPGAs per board. Everything else here (fixed-point scaling, counter widths,
// flit layout, result tags) is this implementation's own choice.
package online_pkg;

  // ---------------- helix track finder ----------------
  localparam int unsigned COORD_W   = 24;  // fixed-point word
  localparam int unsigned WIDE_W    = 48;  // multiply / divide width
  localparam int unsigned HIT_FRAC  = 8;   // hit x,y: Q15.8 (centimetres)
  localparam int unsigned CONF_FRAC = 16;  // conformal x',y': Q7.16 (1/cm)
  localparam int unsigned THETA_BINS = 512;
  localparam int unsigned R_BINS     = 512;
  localparam int unsigned SIN_ENTRIES = 128;
  localparam int unsigned SIN_W       = 16;

  typedef logic signed [COORD_W-1:0] coord_t;

  // ---------------- RICH ring finder ----------------
  localparam int unsigned ROI_SIZE    = 13;
  localparam int unsigned RING_RADIUS = 4;

  // ---------------- event selector ----------------
  localparam int unsigned DMA_BYTES = 32768;

  // ---------------- board interconnect ----------------
  localparam int unsigned BACKPLANE_LINKS = 16;
  localparam int unsigned PROC_FPGAS      = 4;  // 5 FPGAs, one is the router
  localparam int unsigned ROUTER_PORTS    = BACKPLANE_LINKS + PROC_FPGAS;
  localparam int unsigned DEST_W          = $clog2(ROUTER_PORTS);

  typedef struct packed {
    logic [DEST_W-1:0] dest;  // router output port
    logic              last;  // last flit of a packet
    logic [31:0]       data;
  } flit_t;

  // Tag in data[31:28] of a result flit sent by a processor FPGA.
  typedef enum logic [3:0] {
    TAG_TRACK = 4'h1,   // Hough peak: {theta[8:0], r[8:0], count[7:0]}
    TAG_RING  = 4'h2,   // RICH ring: {found, count[5:0], row[6:0], col[6:0]}
    TAG_PID   = 4'h3,   // PID: {track_id[7:0], species[2:0]}
    TAG_EVSEL = 4'h4    // event selector summary: accepted events[23:0]
  } result_tag_e;

  // Particle species of the PID decision.
  typedef enum logic [2:0] {
    PID_NONE     = 3'd0,
    PID_ELECTRON = 3'd1,
    PID_MUON     = 3'd2,
    PID_PION     = 3'd3,
    PID_KAON     = 3'd4,
    PID_PROTON   = 3'd5
  } species_e;

endpackage
