// pid_ctrl: local feedback controller for stand-alone tests.
//
// Closes a loop around the simulated cavity without an external LLRF
// system: the error e = setpoint - pickup drives
//   u = kp e + sum(ki e) + kd (e - e[-1])
// separately on I and Q with the same real gains.  The integrator is
// clamped to full scale (anti-windup) and cleared while clr is high (when
// the controller is not selected).  The original design shows a PID block
// fed by the cavity pickup but does not describe it; the form, the gain
// format and the anti-windup are this design's.
// Interface: Q1.17 IQ; gains signed Q4.14.
// Timing: u is registered 2 clocks after pickup.
module pid_ctrl
  import cs_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  iq_t   pickup,
  input  iq_t   setpoint,
  input  gain_t kp,
  input  gain_t ki,
  input  gain_t kd,
  output iq_t   u
);
  iq_t e, e1;
  logic signed [79:0] int_i, int_q, ni, nq, ui, uq;

  always_comb begin
    ni = int_i + ((80'(ki) * 80'(e.i)) >>> 14);
    nq = int_q + ((80'(ki) * 80'(e.q)) >>> 14);
    ni = (ni > 80'sd131071) ? 80'sd131071 : (ni < -80'sd131072) ? -80'sd131072 : ni;
    nq = (nq > 80'sd131071) ? 80'sd131071 : (nq < -80'sd131072) ? -80'sd131072 : nq;
    ui = ((80'(kp) * 80'(e.i)) >>> 14) + ni + ((80'(kd) * (80'(e.i) - 80'(e1.i))) >>> 14);
    uq = ((80'(kp) * 80'(e.q)) >>> 14) + nq + ((80'(kd) * (80'(e.q) - 80'(e1.q))) >>> 14);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e <= '0; e1 <= '0; int_i <= '0; int_q <= '0; u <= '0;
    end else if (clr) begin
      e <= '0; e1 <= '0; int_i <= '0; int_q <= '0; u <= '0;
    end else begin
      e     <= iq_sub(setpoint, pickup);
      e1    <= e;
      int_i <= ni;
      int_q <= nq;
      u.i   <= sat_smp(ui);
      u.q   <= sat_smp(uq);
    end
  end
endmodule
