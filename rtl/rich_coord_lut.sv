// rich_coord_lut: lookup table from an extrapolated track position to the
// pad of the RICH pad plane where a ring around that track is centred.
//
// The RICH mirror reflects the Cherenkov light back onto a pad plane
// upstream, so the ring centre is not where the track is; the published
// design bridges this with a lookup table. Its contents come from the
// detector geometry and are written at run time through the cfg port (slow
// control). The index is this design's choice: a 6-bit polar and a 6-bit
// azimuthal bin of the track direction, giving 4096 entries of {row, col}.
//
// Interface: lookup with `lk_valid`/`lk_addr`, result (`lk_col`, `lk_row`,
// `lk_out_valid`) one clock later; one lookup per clock. A write and a lookup
// of the same entry in one clock return the old entry.
module rich_coord_lut #(
  parameter int unsigned IDX_W = 12,
  parameter int unsigned PAD_W = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [IDX_W-1:0] cfg_addr,
  input  logic [PAD_W-1:0] cfg_col,
  input  logic [PAD_W-1:0] cfg_row,
  input  logic             lk_valid,
  input  logic [IDX_W-1:0] lk_addr,
  output logic             lk_out_valid,
  output logic [PAD_W-1:0] lk_col,
  output logic [PAD_W-1:0] lk_row
);
  logic [2*PAD_W-1:0] table_q [2**IDX_W];

  always_ff @(posedge clk) begin
    if (cfg_we) table_q[cfg_addr] <= {cfg_row, cfg_col};
    if (lk_valid) {lk_row, lk_col} <= table_q[lk_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lk_out_valid <= 1'b0;
    else        lk_out_valid <= lk_valid;
  end
endmodule
