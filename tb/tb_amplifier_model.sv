// Testbench for amplifier_model.  With a wide-band filter (a = 0, b = 1/2:
// y = (x + x[-1])/2) the first response to a step appears after exactly
// LATENCY = 9 clocks.  Then, with a table whose gain falls with the input
// magnitude (compression) and whose phase is a quarter turn, the output
// must equal table_gain * x rotated by 90 degrees; with ripple r the gain
// is scaled by (1 + 1.25 r) and the phase shifted by kp r.
module tb_amplifier_model;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  iq_t x, y;
  smp_t ripple;
  coef_t lpf_a, lpf_b;
  gain_t ka, kp;
  logic wr_gain = 0, wr_phase = 0;
  logic [9:0] wr_addr;
  logic [17:0] wr_data;
  int checks = 0, failures = 0;

  amplifier_model dut (.clk, .rst_n, .x, .ripple, .lpf_a, .lpf_b, .ka, .kp,
                       .wr_gain, .wr_phase, .wr_addr, .wr_data, .y);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // gain table: 1.0 below address 400, then falling linearly (compression)
  function automatic real gtab(input int k);
    return (k < 400) ? 1.0 : 1.0 - 0.001 * real'(k - 400);
  endfunction

  task automatic chk(input string w, input real got, input real exp, input real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%f exp=%f", w, got, exp);
    end
  endtask

  task automatic steady(input real xi, input real r, input real rot_turns);
    real g, gi, ph, ei, eq;
    int addr;
    longint ai, aq, mx, mn;
    @(negedge clk);
    x.i = smp_t'($rtoi(xi * 131072.0)); x.q = '0;
    ripple = smp_t'($rtoi(r * 131072.0));
    repeat (20) @(negedge clk);
    ai = x.i; aq = 0; mx = ai; mn = 0;
    addr = int'(((mx * 122880 + mn * 61440) >>> 17) >> 8);
    g  = real'(18'($rtoi(gtab(addr) * 65536.0))) / 65536.0;
    gi = g * (1.0 + 1.25 * r);
    ph = 6.283185307179586 * rot_turns;
    ei = real'(x.i) / 131072.0 * gi * $cos(ph);
    eq = real'(x.i) / 131072.0 * gi * $sin(ph);
    chk("I", real'(y.i) / 131072.0, ei, 2.0e-4);
    chk("Q", real'(y.q) / 131072.0, eq, 2.0e-4);
  endtask

  initial begin
    int lat;
    lpf_a = '0; lpf_b = coef_t'(1 <<< 29); ka = gain_t'(81920); kp = '0;
    x = '0; ripple = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 1024; k++) begin
      @(negedge clk);
      wr_addr = 10'(k);
      wr_gain = 1; wr_phase = 1;
      wr_data = 18'($rtoi(gtab(k) * 65536.0));
      @(negedge clk);
      wr_gain = 0; wr_phase = 1; wr_data = 18'(16'h4000);   // quarter turn
    end
    @(negedge clk); wr_gain = 0; wr_phase = 0;
    repeat (20) @(negedge clk);
    // latency
    x.i = smp_t'(40000); x.q = '0;
    lat = 0;
    while (y.q == 0 && lat < 40) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 9) begin failures++; $display("FAIL latency %0d", lat); end
    else $display("amplifier latency %0d clocks", lat);
    // linear region, quarter-turn rotation
    steady(0.3, 0.0, 0.25);
    // compressed region
    steady(0.9, 0.0, 0.25);
    steady(0.99, 0.0, 0.25);
    // PSU ripple on gain, then on phase
    steady(0.3, 0.08, 0.25);
    kp = gain_t'(16384);                     // 0.25 turn per unit ripple
    steady(0.3, -0.2, 0.25 - 0.05);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
