// Testbench for noniq_demod: IF tones at 3/14 of the clock with several
// amplitudes and phases; after the window fills, I + jQ must equal
// A e^{j phi} within 2e-4, with no ripple; a step appears after 3 clocks.
module tb_noniq_demod;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] adc;
  iq_t iq;
  int checks = 0, failures = 0;
  real amp, phi;
  int n;

  noniq_demod dut (.clk, .rst_n, .adc, .iq);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample index n counts clocks since reset, as the demodulator's LO does
  always @(negedge clk) begin
    if (rst_n) begin
      adc <= 16'($rtoi(amp * 32767.0 * $cos(6.283185307179586 * 3.0 * real'(n) / 14.0 + phi)));
      n <= n + 1;
    end
  end

  initial begin
    int lat;
    amp = 0.0; phi = 0.0; n = 0; adc = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (20) @(negedge clk);
    amp = 0.5; phi = 0.0;
    lat = 0;
    while (iq == '0 && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
    for (int t = 0; t < 6; t++) begin
      amp = 0.2 + 0.13 * t; phi = -2.5 + 1.1 * t;
      repeat (20) @(negedge clk);
      for (int s = 0; s < 30; s++) begin
        real ei, eq;
        @(negedge clk);
        ei = amp * $cos(phi) * 32767.0 / 32768.0; eq = amp * $sin(phi) * 32767.0 / 32768.0;
        checks++;
        if ((real'(iq.i) / 131072.0 - ei) > 2.0e-4 || (ei - real'(iq.i) / 131072.0) > 2.0e-4 ||
            (real'(iq.q) / 131072.0 - eq) > 2.0e-4 || (eq - real'(iq.q) / 131072.0) > 2.0e-4) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d iq=(%f,%f) exp=(%f,%f)", t,
            real'(iq.i) / 131072.0, real'(iq.q) / 131072.0, ei, eq);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
