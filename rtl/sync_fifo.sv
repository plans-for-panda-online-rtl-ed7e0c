// sync_fifo: single-clock first-in first-out buffer with valid/ready ports.
//
// DEPTH entries of W bits in a register array with read and write pointers
// one bit wider than the address. A word written in one cycle can be read
// in the next. Writes into a full FIFO are refused (in_ready low); `level`
// reports the fill level. A helper of the result paths, not a block of the
// published design.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [W-1:0]             in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [W-1:0]             out_data,
  output logic [$clog2(DEPTH):0]   level
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp_q, rp_q;

  assign level     = wp_q - rp_q;
  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rp_q[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp_q[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0; rp_q <= '0;
    end else begin
      if (in_valid && in_ready)   wp_q <= wp_q + 1'b1;
      if (out_valid && out_ready) rp_q <= rp_q + 1'b1;
    end
  end
endmodule
