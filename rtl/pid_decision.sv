// pid_decision: particle identification from the plane of Cherenkov angle
// versus track momentum.
//
// Each particle species fills its own band in the (momentum, Cherenkov
// angle) plane, since cos(theta_C) = 1/(n*beta) and beta follows from the
// momentum and the mass. The published design bases the final PID decision
// on this two-dimensional plot; here the plot is a table of cells, each
// holding the species assigned to it (or none), loaded through the cfg port
// from the band limits. The cell grid, 64 momentum bins x 64 angle bins
// taken from the top bits of the inputs, is this design's choice.
//
// Interface: one decision per clock, one clock of latency; the 8-bit track id
// travels alongside.
module pid_decision
  import online_pkg::*;
#(
  parameter int unsigned P_W    = 16,
  parameter int unsigned ANG_W  = 16,
  parameter int unsigned PBIN_W = 6,
  parameter int unsigned ABIN_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [PBIN_W-1:0] cfg_pbin,
  input  logic [ABIN_W-1:0] cfg_abin,
  input  species_e          cfg_species,
  input  logic              in_valid,
  input  logic [P_W-1:0]    in_p,
  input  logic [ANG_W-1:0]  in_angle,
  input  logic [7:0]        in_id,
  output logic              out_valid,
  output species_e          out_species,
  output logic [7:0]        out_id
);
  species_e table_q [2**(PBIN_W+ABIN_W)];
  logic [PBIN_W-1:0] pbin;
  logic [ABIN_W-1:0] abin;

  assign pbin = in_p[P_W-1 -: PBIN_W];
  assign abin = in_angle[ANG_W-1 -: ABIN_W];

  always_ff @(posedge clk) begin
    if (cfg_we)   table_q[{cfg_pbin, cfg_abin}] <= cfg_species;
    if (in_valid) begin
      out_species <= table_q[{pbin, abin}];
      out_id      <= in_id;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
