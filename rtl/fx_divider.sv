// fx_divider: unsigned restoring divider, one quotient bit per clock.
//
// Computes quotient = dividend / divisor for W-bit unsigned operands. A pulse
// on `start` loads the operands; `done` pulses W+1 cycles later with the
// quotient held until the next start. Division by zero returns all ones,
// which the caller treats as saturation. One bit per cycle is the cheapest
// divider in FPGA fabric; the published design gives only the 48-bit width.
module fx_divider #(
  parameter int unsigned W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  localparam int unsigned CW = $clog2(W + 1);

  logic [W-1:0] rem_q, quo_q, div_q;
  logic [CW-1:0] cnt_q;
  logic [W:0]   trial;

  // shift the next dividend bit into the partial remainder and try to subtract
  always_comb trial = {rem_q, quo_q[W-1]} - {1'b0, div_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0; quo_q <= '0; div_q <= '0; cnt_q <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem_q <= '0;
        quo_q <= dividend;
        div_q <= divisor;
        cnt_q <= CW'(W);
        busy  <= 1'b1;
      end else if (busy) begin
        if (!trial[W]) rem_q <= trial[W-1:0];
        else           rem_q <= {rem_q[W-2:0], quo_q[W-1]};
        quo_q <= {quo_q[W-2:0], ~trial[W]};
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient = quo_q;
endmodule
