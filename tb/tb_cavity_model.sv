// Testbench for cavity_model with two modes (the default six are the same
// logic repeated).  Mode 0 sits on the carrier, mode 1 is offset by
// 0.05 rad/sample and has twice the gain.  A constant drive must settle to
// the sum of the two bilinear-transform responses; a common detuning moves
// both modes; the probe follows the drive by 2 clocks.
module tb_cavity_model;
  import cs_pkg::*;
  localparam int NM = 2;
  logic clk = 0, rst_n = 0;
  iq_t drive, probe;
  phase_t detune;
  phase_t mode_offset [NM];
  coef_t coef_a [NM], coef_b [NM];
  int checks = 0, failures = 0;
  real ra, rb;

  cavity_model #(.NUM_MODES(NM)) dut (.clk, .rst_n, .drive, .detune, .mode_offset,
                                       .coef_a, .coef_b, .probe);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // steady-state response to a carrier drive of a mode whose resonance is
  // at +w rad/sample: b(1 + e^{jw}) / (1 - a e^{jw})
  task automatic resp(input real w, input real g, inout real ri, inout real rq);
    real nr, ni, dr, di, den;
    nr = g * rb * (1.0 + $cos(w)); ni = g * rb * $sin(w);
    dr = 1.0 - ra * $cos(w);       di = -ra * $sin(w);
    den = dr * dr + di * di;
    ri += (nr * dr + ni * di) / den;
    rq += (ni * dr - nr * di) / den;
  endtask

  task automatic check_steady(input real w0, input real w1, input real d);
    real ei, eq;
    ei = 0.0; eq = 0.0;
    resp(w0, 1.0, ei, eq);
    resp(w1, 2.0, ei, eq);
    ei *= d; eq *= d;
    checks += 2;
    if ((real'(probe.i) / 131072.0 - ei) > 1.0e-3 || (ei - real'(probe.i) / 131072.0) > 1.0e-3 ||
        (real'(probe.q) / 131072.0 - eq) > 1.0e-3 || (eq - real'(probe.q) / 131072.0) > 1.0e-3) begin
      failures++;
      $display("FAIL probe=(%f,%f) exp=(%f,%f)", real'(probe.i) / 131072.0,
               real'(probe.q) / 131072.0, ei, eq);
    end
  endtask

  function automatic phase_t rad2ph(input real w);
    return phase_t'(longint'(w / 6.283185307179586 * 4294967296.0));
  endfunction

  initial begin
    real K;
    int lat;
    K = 200.0;
    for (int m = 0; m < NM; m++) begin
      coef_a[m] = coef_t'($rtoi((K - 1.0) / (K + 1.0) * 1073741824.0));
      coef_b[m] = coef_t'($rtoi(1.0 / (K + 1.0) * 1073741824.0) * (m + 1));
    end
    ra = real'(coef_a[0]) / 1073741824.0; rb = real'(coef_b[0]) / 1073741824.0;
    mode_offset[0] = '0; mode_offset[1] = rad2ph(0.05);
    detune = '0; drive = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    drive = '{i: 18'sd26214, q: 18'sd0};        // 0.2
    lat = 0;
    while (probe == '0 && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2) begin failures++; $display("FAIL latency %0d", lat); end
    repeat (4000) @(negedge clk);
    check_steady(0.0, 0.05, 0.2);
    // common detuning of -0.02 rad/sample moves both modes
    detune = rad2ph(-0.02);
    repeat (4000) @(negedge clk);
    check_steady(-0.02, 0.03, 0.2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
