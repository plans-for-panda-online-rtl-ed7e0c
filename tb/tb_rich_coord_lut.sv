// tb_rich_coord_lut: fills the 4096-entry coordinate table with random
// pads, reads every entry back in random order with one lookup per clock,
// and checks that a write and a lookup of the same entry in one clock
// return the old entry.
`timescale 1ns/1ps
module tb_rich_coord_lut;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, lk_valid, lk_out_valid;
  logic [11:0] cfg_addr, lk_addr;
  logic [6:0] cfg_col, cfg_row, lk_col, lk_row;
  int checks = 0, failures = 0;
  logic [13:0] model [4096];

  rich_coord_lut dut (.*);

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, pa;
    bit pv;
    cfg_we = 0; lk_valid = 0; cfg_addr = '0; lk_addr = '0; cfg_col = '0; cfg_row = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4096; i++) begin
      cfg_we = 1; cfg_addr = 12'(i);
      cfg_col = 7'($urandom_range(0, 95)); cfg_row = 7'($urandom_range(0, 95));
      model[i] = {cfg_row, cfg_col};
      @(negedge clk);
    end
    cfg_we = 0;
    pv = 0; pa = 0;
    for (int i = 0; i < 5000; i++) begin
      a = $urandom_range(0, 4095);
      lk_valid = 1; lk_addr = 12'(a);
      @(negedge clk);
      checks++;
      if (!lk_out_valid || {lk_row, lk_col} != model[a]) begin
        failures++;
        $display("FAIL entry %0d: got %h expected %h", a, {lk_row, lk_col}, model[a]);
      end
    end
    // same-clock write and lookup: old entry comes back, new one afterwards
    cfg_we = 1; cfg_addr = 12'd77; cfg_col = 7'd5; cfg_row = 7'd6; lk_addr = 12'd77;
    @(negedge clk);
    cfg_we = 0;
    checks++;
    if ({lk_row, lk_col} != model[77]) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk);
    checks++;
    if ({lk_row, lk_col} != {7'd6, 7'd5}) begin failures++; $display("FAIL written entry"); end
    lk_valid = 0;
    @(negedge clk);
    checks++;
    if (lk_out_valid) begin failures++; $display("FAIL valid without lookup"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
