// rich_pad_memory: fired-pad bitmap of one sector of the HADES RICH pad
// plane, read back as windows of consecutive pads of one row.
//
// Each fired pad of an event is written by (col, row); `clear` empties the
// whole plane in one clock before the next event. A read names a row and the
// first column of a window; WIN bits of that row come back one clock later,
// bit i being pad (row, col+i). Pads outside the plane read as not fired, so
// regions of interest at the edge need no special case. The plane size,
// 96 x 96 pads per sector, is this design's figure: 55,296 pads in total is
// the published number, and six sectors of 96 x 96 give exactly that. The
// 13-pad window is the published region-of-interest width.
module rich_pad_memory
  import online_pkg::*;
#(
  parameter int unsigned ROWS = 96,
  parameter int unsigned COLS = 96,
  parameter int unsigned WIN  = ROI_SIZE,
  parameter int unsigned AW   = $clog2(COLS > ROWS ? COLS : ROWS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 hit_valid,
  input  logic [AW-1:0]        hit_col,
  input  logic [AW-1:0]        hit_row,
  input  logic                 rd_en,
  input  logic signed [AW+1:0] rd_row,
  input  logic signed [AW+1:0] rd_col,
  output logic [WIN-1:0]       rd_data
);
  logic [COLS-1:0] plane [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) plane[r] <= '0;
    end else if (clear) begin
      for (int r = 0; r < ROWS; r++) plane[r] <= '0;
    end else if (hit_valid && hit_row < AW'(ROWS) && hit_col < AW'(COLS)) begin
      plane[hit_row][hit_col] <= 1'b1;
    end
  end

  logic [COLS-1:0] row_bits;
  logic            row_ok;
  assign row_ok   = (rd_row >= 0) && (rd_row < (AW+2)'(ROWS));
  assign row_bits = row_ok ? plane[AW'(rd_row)] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_data <= '0;
    else if (rd_en) begin
      for (int i = 0; i < WIN; i++) begin
        automatic logic signed [AW+2:0] c = (AW+3)'(rd_col) + (AW+3)'(i);
        rd_data[i] <= (c >= 0 && c < (AW+3)'(COLS)) ? row_bits[c[AW-1:0]] : 1'b0;
      end
    end
  end
endmodule
