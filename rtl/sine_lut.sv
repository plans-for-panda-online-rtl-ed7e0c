// sine_lut: sine and cosine of a Hough angle bin from a 128-entry table.
//
// The Hough space has 512 angle bins. Bin t stands for the angle
// theta = (t - 256) * pi/256, so the bins cover one full turn, [-pi, pi), in
// steps of pi/256 and a quarter wave is exactly 128 bins. The table holds
// sin(k * pi/256) for k = 0..127 as unsigned 16-bit fractions (value * 65536,
// rounded); the other three quarters come from the usual symmetries, and the
// one value the table cannot hold, 1.0, is produced directly. The table size
// and word width follow the published track finder; the angle range and the
// quarter-wave folding are this design's reading of it. The table file is
// rtl/sine_lut.hex, one hex word per line, word k = round(65536*sin(k*pi/256)).
//
// Interface: `theta` in, `sin_o` and `cos_o` out one clock later as signed
// Q1.16 (18 bits, range -65536..65536). Two reads per clock: a dual-port ROM.
module sine_lut
  import online_pkg::*;
#(
  parameter int unsigned ENTRIES = SIN_ENTRIES,
  parameter int unsigned VW      = SIN_W,
  parameter int unsigned TW      = $clog2(4 * ENTRIES)
) (
  input  logic                 clk,
  input  logic [TW-1:0]        theta,
  output logic signed [VW+1:0] sin_o,
  output logic signed [VW+1:0] cos_o
);
  localparam int unsigned IW = $clog2(ENTRIES);

  logic [VW-1:0] rom [ENTRIES];
  initial $readmemh("rtl/sine_lut.hex", rom);

  // sine of phase p (p * pi/256 as an unsigned angle in [0, 2*pi))
  function automatic logic signed [VW+1:0] fold(input logic [TW-1:0] p);
    logic [1:0]    quad;
    logic [IW-1:0] idx;
    logic [VW:0]   mag;
    quad = p[TW-1 -: 2];
    idx  = p[IW-1:0];
    if (quad[0] == 1'b0) mag = {1'b0, rom[idx]};                 // sin(a)
    else if (idx == '0)  mag = (VW+1)'(1) << VW;                 // cos(0) = 1
    else                 mag = {1'b0, rom[IW'(ENTRIES) - idx]};  // cos(a)
    return quad[1] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  endfunction

  logic [TW-1:0] phase_s, phase_c;
  // theta_t = (t - 256) pi/256  ->  phase = t xor 256 (mod 2 pi)
  assign phase_s = theta ^ (TW'(1) << (TW-1));
  assign phase_c = phase_s + TW'(ENTRIES);          // cos(a) = sin(a + pi/2)

  always_ff @(posedge clk) begin
    sin_o <= fold(phase_s);
    cos_o <= fold(phase_c);
  end
endmodule
