// tb_cherenkov_angle_lut: loads every (radius, z) entry of the Cherenkov
// angle table with a value from a reference copy, then issues random lookups
// on random clocks and checks angle, tag and the one-clock valid latency.
// A second pass overwrites part of the table and checks the new contents.
`timescale 1ns/1ps
module tb_cherenkov_angle_lut;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, in_valid, out_valid;
  logic [6:0] cfg_r, cfg_z, in_r, in_z;
  logic [15:0] cfg_angle, in_tag, out_angle, out_tag;
  int checks = 0, failures = 0;

  cherenkov_angle_lut dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] ref_t [16384];
  logic        exp_v;
  logic [15:0] exp_a, exp_t;

  task automatic load(int from, int to);
    for (int i = from; i < to; i++) begin
      ref_t[i] = 16'($urandom);
      cfg_we = 1; {cfg_r, cfg_z} = 14'(i); cfg_angle = ref_t[i];
      @(negedge clk);
    end
    cfg_we = 0;
  endtask

  task automatic lookups(int n);
    int idx;
    exp_v = 0;
    for (int k = 0; k < n; k++) begin
      idx = $urandom_range(0, 16383);
      in_valid = ($urandom_range(0, 3) != 0);
      {in_r, in_z} = 14'(idx); in_tag = 16'($urandom);
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid || (in_valid && (out_angle !== ref_t[idx] || out_tag !== in_tag))) begin
        failures++;
        $display("FAIL idx %0d: valid %0b angle %h (want %h) tag %h (want %h)", idx, out_valid,
                 out_angle, ref_t[idx], out_tag, in_tag);
      end
    end
    in_valid = 0;
  endtask

  initial begin
    cfg_we = 0; in_valid = 0; cfg_r = 0; cfg_z = 0; cfg_angle = 0; in_r = 0; in_z = 0; in_tag = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(0, 16384);
    lookups(3000);
    load(4000, 6000);
    lookups(3000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
