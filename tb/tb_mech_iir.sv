// Testbench for mech_iir: random coefficients of a stable section and random
// input against an integer model of the same biquad; checks that en = 0
// holds the state, and the pass-through reset coefficients.
module tb_mech_iir;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [31:0] x, y;
  coef_t b0, b1, b2, a1, a2;
  int checks = 0, failures = 0;
  longint mx1, mx2, my1, my, mexp;

  mech_iir dut (.clk, .rst_n, .en, .x, .b0, .b1, .b2, .a1, .a2, .y);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // resonant low-pass: poles at r = 0.98, angle 0.1 rad
    b0 = coef_t'(32'sd1073741 * 4); b1 = coef_t'(32'sd1073741 * 8); b2 = coef_t'(32'sd1073741 * 4);
    a1 = coef_t'(-$rtoi(2.0 * 0.98 * $cos(0.1) * 1073741824.0));
    a2 = coef_t'($rtoi(0.98 * 0.98 * 1073741824.0));
    x = '0; mx1 = 0; mx2 = 0; my1 = 0; my = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (longint'(y) != my) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d y=%0d exp=%0d", n, y, my);
      end
      en = (n % 4 != 3);
      x  = 32'($urandom) >>> 6;
      if (en) begin
        mexp = (longint'(b0) * x + longint'(b1) * mx1 + longint'(b2) * mx2
                - longint'(a1) * my - longint'(a2) * my1) >>> 30;
        if (mexp > 64'sd2147483647) mexp = 64'sd2147483647;
        if (mexp < -64'sd2147483648) mexp = -64'sd2147483648;
        mx2 = mx1; mx1 = longint'(x); my1 = my; my = mexp;
      end
    end
    // pass-through
    @(negedge clk);
    b0 = C_ONE; b1 = '0; b2 = '0; a1 = '0; a2 = '0; en = 1; x = 32'sd123456789;
    @(negedge clk);
    checks++;
    if (y != x) begin failures++; $display("FAIL pass-through y=%0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
