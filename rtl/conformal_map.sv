// conformal_map: conformal transformation of detector hits for the helix
// track finder.
//
// For a hit (x, y) and a reference point (x0, y0), normally the interaction
// point, it computes x' = (x-x0)/r^2 and y' = (y-y0)/r^2 with
// r^2 = (x-x0)^2 + (y-y0)^2. Circles through (x0, y0) - helix tracks seen in
// the xy plane - become straight lines, which the Hough stage then finds.
// The transformation, the 24-bit fixed-point words and the widening to 48
// bits for the multiply and divide follow the published algorithm. The
// fixed-point scaling is this design's choice: hits are Q15.8 (centimetres),
// results are Q7.16 (1/cm), so each quotient is (|dx| << 24) / r^2 on 48 bits.
// Results that exceed 24 bits (a hit within about 0.0078 cm of (x0, y0), or
// on it) saturate.
//
// Interface: valid/ready stream in (x, y, last) and out (xp, yp, last); `last`
// marks the final hit of an event and is passed through. One hit is in
// flight at a time: latency 50 cycles from accept to out_valid (two 48-bit
// bit-serial dividers working in parallel), throughput one hit per 51 cycles.
module conformal_map
  import online_pkg::*;
#(
  parameter int unsigned CW    = COORD_W,
  parameter int unsigned WW    = WIDE_W,
  parameter int unsigned SHIFT = HIT_FRAC + CONF_FRAC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [CW-1:0] x0,
  input  logic signed [CW-1:0] y0,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [CW-1:0] in_x,
  input  logic signed [CW-1:0] in_y,
  input  logic                 in_last,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic signed [CW-1:0] out_xp,
  output logic signed [CW-1:0] out_yp,
  output logic                 out_last
);
  typedef enum logic [1:0] {S_IDLE, S_SQUARE, S_DIVIDE, S_OUT} state_e;
  state_e state_q;

  logic signed [CW:0] dx_q, dy_q;        // one extra bit: no overflow
  logic        [WW-1:0] r2;
  logic        last_q;
  logic        start_div;
  logic        busy_x, busy_y, done_x, done_y, have_x_q, have_y_q;
  logic [WW-1:0] qx, qy, num_x, num_y;
  logic [CW:0] adx, ady;

  assign in_ready  = (state_q == S_IDLE);
  assign out_valid = (state_q == S_OUT);
  assign start_div = (state_q == S_SQUARE);

  assign adx   = dx_q[CW] ? -dx_q : dx_q;
  assign ady   = dy_q[CW] ? -dy_q : dy_q;
  assign num_x = WW'(adx) << SHIFT;
  assign num_y = WW'(ady) << SHIFT;
  // 48-bit squares: the sum stays exact for |dx|,|dy| below 2^23 LSB (328 m)
  assign r2    = WW'(adx) * WW'(adx) + WW'(ady) * WW'(ady);

  fx_divider #(.W(WW)) u_div_x (
    .clk, .rst_n, .start(start_div), .dividend(num_x), .divisor(r2),
    .busy(busy_x), .done(done_x), .quotient(qx)
  );
  fx_divider #(.W(WW)) u_div_y (
    .clk, .rst_n, .start(start_div), .dividend(num_y), .divisor(r2),
    .busy(busy_y), .done(done_y), .quotient(qy)
  );

  // saturate an unsigned quotient to a signed CW-bit result with given sign
  function automatic logic signed [CW-1:0] sat_signed(input logic [WW-1:0] q, input logic neg);
    logic [CW-1:0] mag;
    mag = (q > WW'((1 << (CW-1)) - 1)) ? CW'((1 << (CW-1)) - 1) : q[CW-1:0];
    return neg ? -$signed(mag) : $signed(mag);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      dx_q <= '0; dy_q <= '0; last_q <= 1'b0;
      have_x_q <= 1'b0; have_y_q <= 1'b0;
      out_xp <= '0; out_yp <= '0; out_last <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (in_valid) begin
          dx_q   <= (CW+1)'(in_x) - (CW+1)'(x0);
          dy_q   <= (CW+1)'(in_y) - (CW+1)'(y0);
          last_q <= in_last;
          state_q <= S_SQUARE;
        end
        S_SQUARE: begin
          // the dividers load r^2 and both numerators in this cycle
          have_x_q <= 1'b0; have_y_q <= 1'b0;
          state_q <= S_DIVIDE;
        end
        S_DIVIDE: begin
          if (done_x) begin out_xp <= sat_signed(qx, dx_q[CW]); have_x_q <= 1'b1; end
          if (done_y) begin out_yp <= sat_signed(qy, dy_q[CW]); have_y_q <= 1'b1; end
          if ((done_x || have_x_q) && (done_y || have_y_q)) begin
            out_last <= last_q;
            state_q  <= S_OUT;
          end
        end
        S_OUT: if (out_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // the output word must hold while the consumer stalls
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_xp) && $stable(out_yp));
endmodule
