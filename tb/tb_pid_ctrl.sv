// Testbench for pid_ctrl: step responses of P, I and D terms against an
// integer model, integrator clamping, clearing; then a closed loop around
// a first-order plant must settle to the setpoint.
module tb_pid_ctrl;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  iq_t pickup, setpoint, u;
  gain_t kp, ki, kd;
  int checks = 0, failures = 0;

  pid_ctrl dut (.clk, .rst_n, .clr, .pickup, .setpoint, .kp, .ki, .kd, .u);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint clamp(input longint v);
    return (v > 131071) ? 131071 : (v < -131072) ? -131072 : v;
  endfunction

  initial begin
    longint integ, e, e1, exp_u;
    real plant_i, plant_q;
    kp = gain_t'(8192); ki = gain_t'(1638); kd = gain_t'(4096);   // 0.5, 0.1, 0.25
    pickup = '0; setpoint = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    setpoint = '{i: 18'sd10000, q: -18'sd4000};
    // open loop, pickup 0: e = setpoint from the next clock on
    integ = 0; e1 = 0;
    @(negedge clk);           // e registered
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      e = 10000;
      integ = clamp(integ + ((longint'(ki) * e) >>> 14));
      exp_u = clamp(((longint'(kp) * e) >>> 14) + integ + ((longint'(kd) * (e - e1)) >>> 14));
      e1 = e;
      checks++;
      if (longint'(u.i) != exp_u) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d u.i=%0d exp=%0d", n, u.i, exp_u);
      end
    end
    // integrator clamp after a long time
    repeat (2000) @(negedge clk);
    checks++;
    if (u.i != SMP_MAX || u.q != SMP_MIN) begin failures++; $display("FAIL clamp u=(%0d,%0d)", u.i, u.q); end
    clr = 1; @(negedge clk); clr = 0;
    checks++;
    if (u != '0) begin failures++; $display("FAIL clear"); end
    // closed loop with plant y += 0.05 (u - y)
    plant_i = 0; plant_q = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      plant_i += 0.05 * (real'(u.i) - plant_i);
      plant_q += 0.05 * (real'(u.q) - plant_q);
      pickup.i = smp_t'($rtoi(plant_i)); pickup.q = smp_t'($rtoi(plant_q));
    end
    checks++;
    if (pickup.i < 9990 || pickup.i > 10010 || pickup.q < -4010 || pickup.q > -3990) begin
      failures++; $display("FAIL closed loop pickup=(%0d,%0d)", pickup.i, pickup.q);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
