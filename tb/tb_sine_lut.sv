// tb_sine_lut: checks sine and cosine of all 512 Hough angle bins against
// floating-point $sin/$cos of theta_t = (t-256)*pi/256, scaled by 65536.
// Rounded table words must be within 1 LSB; the quarter angles must be
// exact (0 and +-65536). Also checks the one-clock read latency.
`timescale 1ns/1ps
module tb_sine_lut;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [8:0] theta;
  logic signed [17:0] sin_o, cos_o;
  int checks = 0, failures = 0;

  sine_lut dut (.clk, .theta, .sin_o, .cos_o);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a;
    int es, ec;
    theta = '0;
    @(negedge clk);
    for (int t = 0; t < 512; t++) begin
      theta = 9'(t);
      @(posedge clk);          // registered read
      @(negedge clk);
      a  = real'(t - 256) * 3.14159265358979 / 256.0;
      es = $rtoi($sin(a) * 65536.0 + ($sin(a) >= 0 ? 0.5 : -0.5));
      ec = $rtoi($cos(a) * 65536.0 + ($cos(a) >= 0 ? 0.5 : -0.5));
      checks++;
      if (int'(sin_o) - es > 1 || es - int'(sin_o) > 1 ||
          int'(cos_o) - ec > 1 || ec - int'(cos_o) > 1) begin
        failures++;
        $display("FAIL t=%0d sin %0d/%0d cos %0d/%0d", t, sin_o, es, cos_o, ec);
      end
      if (t % 128 == 0) begin
        checks++;
        if (int'(sin_o) != es || int'(cos_o) != ec) begin
          failures++;
          $display("FAIL exact quarter t=%0d sin %0d/%0d cos %0d/%0d", t, sin_o, es, cos_o, ec);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
