// cherenkov_angle_lut: Cherenkov angle of a DIRC track as a lookup table of
// the ring radius and the track's entry position along the quartz bar.
//
// In the DIRC the photons are reflected along the bar and leave it at its
// end, so the ring radius measured in the focal plane gives the Cherenkov
// angle only together with the z position where the track entered the bar.
// The published design computes the angle from these two values with a
// lookup table (the FPGA has no floating point); the table contents come
// from the DIRC optics and are loaded through the cfg port. The index size
// is this design's choice: 7 bits of ring radius and 7 bits of z, giving
// 16384 entries of 16 bits, with the angle in whatever fixed-point unit the
// table loader chooses.
//
// Interface: one lookup per clock, result one clock later with `out_valid`;
// a 16-bit tag (track number, momentum, ...) travels alongside.
module cherenkov_angle_lut #(
  parameter int unsigned R_W   = 7,
  parameter int unsigned Z_W   = 7,
  parameter int unsigned ANG_W = 16,
  parameter int unsigned TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [R_W-1:0]   cfg_r,
  input  logic [Z_W-1:0]   cfg_z,
  input  logic [ANG_W-1:0] cfg_angle,
  input  logic             in_valid,
  input  logic [R_W-1:0]   in_r,
  input  logic [Z_W-1:0]   in_z,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [ANG_W-1:0] out_angle,
  output logic [TAG_W-1:0] out_tag
);
  logic [ANG_W-1:0] table_q [2**(R_W+Z_W)];

  always_ff @(posedge clk) begin
    if (cfg_we)   table_q[{cfg_r, cfg_z}] <= cfg_angle;
    if (in_valid) begin
      out_angle <= table_q[{in_r, in_z}];
      out_tag   <= in_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
