// tb_pid_decision: fills the 64 x 64 cell table with the species whose band
// is nearest to each cell centre (electron, muon, pion, kaon, proton in a
// radiator of index 1.47, momentum 0..6.4 GeV/c, angle 0..0.96 rad), then
// checks random (momentum, angle) inputs on random clocks against the same
// computation: species, id and one-clock valid latency.
`timescale 1ns/1ps
module tb_pid_decision;
  import online_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, in_valid, out_valid;
  logic [5:0] cfg_pbin, cfg_abin;
  species_e cfg_species, out_species;
  logic [15:0] in_p, in_angle;
  logic [7:0] in_id, out_id;
  int checks = 0, failures = 0;

  pid_decision dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // momentum LSB 0.1 GeV/c per bin, angle LSB 0.015 rad per bin
  function automatic species_e classify(int pb, int ab);
    real mass [5] = '{0.000511, 0.1057, 0.1396, 0.4937, 0.9383};
    species_e sp [5] = '{PID_ELECTRON, PID_MUON, PID_PION, PID_KAON, PID_PROTON};
    real p, a, beta, c, th, best;
    species_e r;
    p = 0.1 * (pb + 0.5); a = 0.015 * (ab + 0.5);
    best = 0.02; r = PID_NONE;                      // cells far from every band stay empty
    for (int k = 0; k < 5; k++) begin
      beta = p / $sqrt(p * p + mass[k] * mass[k]);
      c = 1.0 / (1.47 * beta);
      if (c <= 1.0) begin
        th = $acos(c);
        if ((th > a ? th - a : a - th) < best) begin best = th > a ? th - a : a - th; r = sp[k]; end
      end
    end
    return r;
  endfunction

  species_e ref_t [64][64];

  initial begin
    int pb, ab, n_id = 0;
    logic [7:0] id;
    cfg_we = 0; in_valid = 0; cfg_pbin = 0; cfg_abin = 0; cfg_species = PID_NONE;
    in_p = 0; in_angle = 0; in_id = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        ref_t[i][j] = classify(i, j);
        cfg_we = 1; cfg_pbin = 6'(i); cfg_abin = 6'(j); cfg_species = ref_t[i][j];
        @(negedge clk);
      end
    cfg_we = 0;
    for (int k = 0; k < 5000; k++) begin
      in_p = 16'($urandom); in_angle = 16'($urandom); id = 8'($urandom);
      pb = int'(in_p[15:10]); ab = int'(in_angle[15:10]);
      in_valid = ($urandom_range(0, 3) != 0); in_id = id;
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid || (in_valid && (out_species !== ref_t[pb][ab] || out_id !== id))) begin
        failures++;
        $display("FAIL p %h a %h: %s want %s", in_p, in_angle, out_species.name(), ref_t[pb][ab].name());
      end
      if (in_valid && ref_t[pb][ab] != PID_NONE) n_id++;
    end
    in_valid = 0;
    checks++;
    if (n_id < 100) begin failures++; $display("FAIL only %0d identified inputs", n_id); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
