// Testbench for iq_rotator: random samples and phases against a real-number
// rotation (3 LSB tolerance) and the 6-clock latency.
module tb_iq_rotator;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  iq_t x, y;
  phase_t ph;
  int checks = 0, failures = 0;
  iq_t xh [16];
  phase_t phh [16];

  iq_rotator dut (.clk, .rst_n, .x, .ph, .y);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0; ph = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n >= 6) begin
        real a, ei, eq, xi, xq;
        a  = 6.283185307179586 * real'(phh[(n-6)%16]) / 4294967296.0;
        xi = real'(xh[(n-6)%16].i); xq = real'(xh[(n-6)%16].q);
        ei = xi * $cos(a) - xq * $sin(a);
        eq = xi * $sin(a) + xq * $cos(a);
        if (ei > 131071.0) ei = 131071.0; if (ei < -131072.0) ei = -131072.0;
        if (eq > 131071.0) eq = 131071.0; if (eq < -131072.0) eq = -131072.0;
        checks++;
        if ((real'(y.i) - ei) > 3.0 || (ei - real'(y.i)) > 3.0 || (real'(y.q) - eq) > 3.0 || (eq - real'(y.q)) > 3.0) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d y=(%0d,%0d) exp=(%f,%f)", n, y.i, y.q, ei, eq);
        end
      end
      x.i = smp_t'($urandom); x.q = smp_t'($urandom); ph = $urandom;
      if (n % 7 == 0) ph = '0;
      xh[n%16] = x; phh[n%16] = ph;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
