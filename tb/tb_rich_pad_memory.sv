// tb_rich_pad_memory: writes random fired pads into the 96 x 96 plane and
// reads 13-pad windows at random rows and columns, including windows that
// hang over every edge, comparing with a testbench copy of the plane; then
// checks that `clear` empties it.
`timescale 1ns/1ps
module tb_rich_pad_memory;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, hit_valid, rd_en;
  logic [6:0] hit_col, hit_row;
  logic signed [8:0] rd_row, rd_col;
  logic [12:0] rd_data;
  int checks = 0, failures = 0;
  bit plane [96][96];

  rich_pad_memory dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(int r, int c);
    logic [12:0] e;
    for (int i = 0; i < 13; i++)
      e[i] = (r >= 0 && r < 96 && c + i >= 0 && c + i < 96) ? plane[r][c + i] : 1'b0;
    rd_row = 9'(r); rd_col = 9'(c); rd_en = 1;
    @(negedge clk); rd_en = 0;
    checks++;
    if (rd_data !== e) begin
      failures++;
      $display("FAIL row %0d col %0d: got %b expected %b", r, c, rd_data, e);
    end
  endtask

  initial begin
    clear = 0; hit_valid = 0; rd_en = 0; hit_col = '0; hit_row = '0; rd_row = '0; rd_col = '0;
    foreach (plane[r, c]) plane[r][c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 800; k++) begin
      hit_col = 7'($urandom_range(0, 95)); hit_row = 7'($urandom_range(0, 95));
      hit_valid = 1;
      plane[hit_row][hit_col] = 1;
      @(negedge clk);
    end
    hit_valid = 0;
    for (int k = 0; k < 600; k++) read_check($urandom_range(0, 109) - 7, $urandom_range(0, 121) - 19);
    read_check(-1, 0); read_check(95, 90); read_check(0, -12); read_check(96, 10);
    clear = 1; @(negedge clk); clear = 0;
    foreach (plane[r, c]) plane[r][c] = 0;
    for (int k = 0; k < 50; k++) read_check($urandom_range(0, 95), $urandom_range(0, 95) - 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
