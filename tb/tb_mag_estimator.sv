// Testbench for mag_estimator: random samples; the estimate must equal
// 15/16 max + 15/32 min of |I|,|Q| (integer reference) and lie within
// -7 %..+7 % of the true magnitude.  One-clock latency.
module tb_mag_estimator;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  iq_t x;
  logic [17:0] mag;
  int checks = 0, failures = 0;
  iq_t prev;

  mag_estimator dut (.clk, .rst_n, .x, .mag);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0; prev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n > 0) begin
        longint ai, aq, mx, mn, e;
        real tru;
        ai = (prev.i < 0) ? -longint'(prev.i) : longint'(prev.i);
        aq = (prev.q < 0) ? -longint'(prev.q) : longint'(prev.q);
        mx = (ai > aq) ? ai : aq; mn = (ai > aq) ? aq : ai;
        e  = (mx * 122880 + mn * 61440) >>> 17;
        if (e > 262143) e = 262143;
        checks++;
        if (longint'(mag) != e) begin
          failures++;
          if (failures < 10) $display("FAIL x=(%0d,%0d) mag=%0d exp=%0d", prev.i, prev.q, mag, e);
        end
        tru = $sqrt(real'(ai*ai + aq*aq));
        checks++;
        if (tru > 100.0 && (real'(mag) < 0.93 * tru || real'(mag) > 1.07 * tru)) begin
          failures++;
          $display("FAIL accuracy x=(%0d,%0d) mag=%0d true=%f", prev.i, prev.q, mag, tru);
        end
      end
      x.i = smp_t'($urandom); x.q = smp_t'($urandom);
      if (n % 11 == 0) x.i = SMP_MIN;
      prev = x;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
