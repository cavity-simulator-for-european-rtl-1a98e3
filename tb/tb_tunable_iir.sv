// Testbench for tunable_iir: compares the filter with a real-number model
// of the bilinear-transform resonator, for an untuned and a detuned filter,
// and checks the steady-state gain at resonance (R_L = 1 -> gain 1) and the
// one-clock latency.
module tb_tunable_iir;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  iq_t x, y;
  coef_t a, b, cw, sw;
  int checks = 0, failures = 0;
  real ra, rb, rc, rs, mi, mq, si, sq, yi, yq, xi, xq, pyi, pyq;

  tunable_iir dut (.clk, .rst_n, .x, .a, .b, .cos_wt(cw), .sin_wt(sw), .y);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%f exp=%f", what, got, exp);
    end
  endtask

  // run N samples of drive (di, dq); compare each output with the model
  task automatic run(input int n, input real di, input real dq);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      // output now corresponds to the input of the previous clock
      chk("y.i", real'(y.i) / 131072.0, pyi, 6.0 / 131072.0);
      chk("y.q", real'(y.q) / 131072.0, pyq, 6.0 / 131072.0);
      x.i = smp_t'($rtoi(di * 131072.0));
      x.q = smp_t'($rtoi(dq * 131072.0));
      xi = real'(x.i) / 131072.0; xq = real'(x.q) / 131072.0;
      // model: y = b x + R(s), s = b x + a y
      yi = rb * xi + (rc * si - rs * sq);
      yq = rb * xq + (rs * si + rc * sq);
      si = rb * xi + ra * yi;
      sq = rb * xq + ra * yq;
      pyi = yi; pyq = yq;
    end
  endtask

  initial begin
    real K, ang;
    K = 200.0;                               // loaded Q of ~190 at w0T = 4
    a = coef_t'($rtoi((K - 1.0) / (K + 1.0) * 1073741824.0));
    b = coef_t'($rtoi(1.0 / (K + 1.0) * 1073741824.0));
    ra = real'(a) / 1073741824.0; rb = real'(b) / 1073741824.0;
    cw = C_ONE; sw = '0; rc = 1.0; rs = 0.0;
    x = '0; si = 0; sq = 0; pyi = 0; pyq = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // untuned: step response, steady state gain ~ 2b/(1-a) = 1
    run(3000, 0.5, -0.25);
    chk("dc gain I", real'(y.i) / 131072.0, 0.5, 1.0e-3);
    chk("dc gain Q", real'(y.q) / 131072.0, -0.25, 1.0e-3);
    // decay
    run(500, 0.0, 0.0);
    // detuned by 0.05 rad/sample: constant drive is now off resonance
    @(posedge clk); #1;
    ang = 0.05;
    cw = coef_t'($rtoi($cos(ang) * 1073741824.0));
    sw = coef_t'($rtoi($sin(ang) * 1073741824.0));
    rc = real'(cw) / 1073741824.0; rs = real'(sw) / 1073741824.0;
    run(3000, 0.5, 0.0);
    // |Z| at dw: 1/|1 + j 2 Q dw/w0| with 2Q/(w0T) = K/2 -> 1/|1+j K/2 tan(ang/2)*2/...|
    // use the exact bilinear response: H = b(1+e^-jw)/(1 - a e^-jw) at w = -ang relative
    begin
      real num_r, num_i, den_r, den_i, hr, hi, mag2, exp_mag, got_mag;
      // drive at 0 Hz, resonance at +ang: relative frequency -ang
      num_r = rb * (1.0 + $cos(ang)); num_i = rb * $sin(ang);
      den_r = 1.0 - ra * $cos(ang);   den_i = -ra * $sin(ang);
      mag2 = (num_r * num_r + num_i * num_i) / (den_r * den_r + den_i * den_i);
      exp_mag = 0.5 * $sqrt(mag2);
      got_mag = $sqrt((real'(y.i) * real'(y.i) + real'(y.q) * real'(y.q))) / 131072.0;
      chk("detuned magnitude", got_mag, exp_mag, 2.0e-3);
      checks++;
      if (!(got_mag < 0.2)) begin failures++; $display("FAIL detuning did not reduce response"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
