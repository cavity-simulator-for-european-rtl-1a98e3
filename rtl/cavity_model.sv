// cavity_model: superconducting cavity as a bank of tunable resonators.
//
// Each of NUM_MODES passband modes (pi, 5pi/6, ... modes of the multi-cell
// cavity) is one tunable_iir with its own coefficients a, b (loaded Q and
// shunt impedance) and its own frequency offset.  All modes see the same
// drive and the same common detuning; mode m is tuned to
//   angle_m = detune + mode_offset[m]     (phase per sample, 2^32 = 1 turn)
// whose cos/sin come from one sincos_taylor per mode.  The probe signal is
// the saturated sum of all mode outputs.  Parallel modes, a common
// detuning and the probe as their sum follow the original model; the
// widths are this design's.
//
// Timing: probe is registered, 2 clocks after drive (filter + sum).  A
// change of detune reaches the filters 6 clocks later (1 + sincos).
module cavity_model
  import cs_pkg::*;
#(
  parameter int NUM_MODES = 6
) (
  input  logic   clk,
  input  logic   rst_n,
  input  iq_t    drive,
  input  phase_t detune,
  input  phase_t mode_offset [NUM_MODES],
  input  coef_t  coef_a      [NUM_MODES],
  input  coef_t  coef_b      [NUM_MODES],
  output iq_t    probe
);
  phase_t ang [NUM_MODES];
  coef_t  c [NUM_MODES], s [NUM_MODES];
  iq_t    ym [NUM_MODES];
  logic signed [79:0] sum_i, sum_q;

  for (genvar m = 0; m < NUM_MODES; m++) begin : g_mode
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) ang[m] <= '0;
      else        ang[m] <= detune + mode_offset[m];

    sincos_taylor u_sc (.clk, .rst_n, .ph(ang[m]), .cos_o(c[m]), .sin_o(s[m]));

    tunable_iir u_iir (
      .clk, .rst_n, .x(drive), .a(coef_a[m]), .b(coef_b[m]),
      .cos_wt(c[m]), .sin_wt(s[m]), .y(ym[m])
    );
  end

  always_comb begin
    sum_i = '0;
    sum_q = '0;
    for (int m = 0; m < NUM_MODES; m++) begin
      sum_i += 80'(ym[m].i);
      sum_q += 80'(ym[m].q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) probe <= '0;
    else begin
      probe.i <= sat_smp(sum_i);
      probe.q <= sat_smp(sum_q);
    end
  end
endmodule
