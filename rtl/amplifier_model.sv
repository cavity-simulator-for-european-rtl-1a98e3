// amplifier_model: high-power RF amplifier (klystron) in baseband.
//
// Three effects are modelled:
//  * gain compression (AM/AM, AM/PM): the input magnitude, estimated by
//    mag_estimator (alpha max + beta min), addresses a gain table and a
//    phase table (top 10 bits of the Q1.17 magnitude, 1024 entries each);
//  * power-supply ripple: with r = dVk/Vk from modulator_gen, the gain is
//    multiplied by (1 + ka*r) and the phase shifted by kp*r.  The klystron
//    relations are dVout/Vout = 5/4 dVk/Vk and dphi = 2 pi L /
//    sqrt(2 e Vk / m) * dVk/Vk, so ka resets to 1.25 and kp is loaded from
//    the tube's drift length L and cathode voltage Vk;
//  * limited bandwidth: the same complex IIR filter as the cavity, with a
//    low Q and no detuning (cos = 1, sin = 0).
// Signal order, as in the original block diagram: input x total gain ->
// low-pass filter -> rotation by the total phase.  Table size, formats
// and pipelining are this design's choices.
// Interface: x, y Q1.17 IQ; ripple Q1.17; ka Q2.16; kp Q2.16 turns per
// unit ripple; gain table entries Q2.16, phase entries signed 16-bit
// fractions of a turn.  Tables are written through wr_* (gain when
// wr_gain, phase when wr_phase).
// Timing: LATENCY = 9 clocks from x to y; a new sample every clock.  The
// phase path (magnitude 1, table 1, ripple 1, sin/cos 5) is presented to
// the rotator two clocks ahead of the filtered sample.
module amplifier_model
  import cs_pkg::*;
#(
  parameter int LUT_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  iq_t         x,
  input  smp_t        ripple,
  input  coef_t       lpf_a,
  input  coef_t       lpf_b,
  input  gain_t       ka,
  input  gain_t       kp,
  input  logic        wr_gain,
  input  logic        wr_phase,
  input  logic [$clog2(LUT_DEPTH)-1:0] wr_addr,
  input  logic [17:0] wr_data,
  output iq_t         y
);
  localparam int AW = $clog2(LUT_DEPTH);
  logic [17:0] mag;
  logic [17:0] g_rd, p_rd;
  iq_t   x1, x2, x3, xg, ylp;
  smp_t  r2;
  gain_t gt;
  phase_t ph3;
  logic signed [63:0] kr, gm, gprod, kpr;
  logic signed [79:0] xgi, xgq;

  mag_estimator u_mag (.clk, .rst_n, .x, .mag);

  table_ram #(.DEPTH(LUT_DEPTH), .W(18)) u_gain (
    .clk, .wr_en(wr_gain), .wr_addr, .wr_data, .rd_addr(mag[17 -: AW]), .rd_data(g_rd)
  );
  table_ram #(.DEPTH(LUT_DEPTH), .W(18)) u_phase (
    .clk, .wr_en(wr_phase), .wr_addr, .wr_data, .rd_addr(mag[17 -: AW]), .rd_data(p_rd)
  );

  always_comb begin
    kr    = (64'(ka) * 64'(r2)) >>> (IQ_W - 1);                 // Q2.16
    gm    = 64'(signed'(G_ONE)) + kr;
    gprod = (64'(signed'(g_rd)) * gm) >>> G_FRAC;
    kpr   = (64'(kp) * 64'(r2)) >>> (IQ_W - 1);                 // turns, Q2.16
    xgi   = (80'(x3.i) * 80'(gt)) >>> G_FRAC;
    xgq   = (80'(x3.q) * 80'(gt)) >>> G_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1 <= '0; x2 <= '0; x3 <= '0; xg <= '0; r2 <= '0; gt <= '0; ph3 <= '0;
    end else begin
      x1 <= x;
      x2 <= x1;
      r2 <= ripple;
      x3 <= x2;
      gt <= (gprod > 64'sd131071) ? gain_t'(131071) :
            (gprod < -64'sd131072) ? gain_t'(-131072) : gain_t'(gprod);
      ph3 <= {p_rd[15:0], 16'h0} + phase_t'(kpr <<< 16);
      xg.i <= sat_smp(xgi);
      xg.q <= sat_smp(xgq);
    end
  end

  tunable_iir u_lpf (
    .clk, .rst_n, .x(xg), .a(lpf_a), .b(lpf_b), .cos_wt(C_ONE), .sin_wt('0), .y(ylp)
  );

  iq_rotator #(.X_DELAY(3)) u_rot (.clk, .rst_n, .x(ylp), .ph(ph3), .y);
endmodule
