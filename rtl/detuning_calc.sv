// detuning_calc: common detuning of the cavity modes.
//
// Four of the five detuning components are summed here (the fifth, each
// mode's own frequency, is added in cavity_model):
//   lfd   = k_lfd * (I^2 + Q^2) of the cavity probe  (Lorentz force)
//   piezo = k_pz  * (piezo1 + piezo2)               (two piezo ADCs)
//   mic   = k_mic * microphonics sample
// The sum passes through mech_iir (mechanical response) and the constant
// detuning is added after it:
//   detune = mech_iir(lfd + piezo + mic) + det_const
// The filter output is also the piezo-sensor signal (mech_out).  The
// order of the sums follows the original model's block diagram; the
// scale factors k_pz and k_mic are this design's.
// Units: detune and det_const are phase words per sample (2^32 = 1 turn);
// k_lfd is the detuning at full-scale |probe| = 1, k_pz and k_mic the
// detuning at full-scale input.  mech_en is the filter's update strobe.
// Timing: 4 clocks from probe/piezo to detune.
module detuning_calc
  import cs_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  iq_t   probe,
  input  smp_t  piezo1,
  input  smp_t  piezo2,
  input  smp_t  mic,
  input  coef_t k_lfd,
  input  coef_t k_pz,
  input  coef_t k_mic,
  input  coef_t det_const,
  input  logic  mech_en,
  input  coef_t mech_b0,
  input  coef_t mech_b1,
  input  coef_t mech_b2,
  input  coef_t mech_a1,
  input  coef_t mech_a2,
  output logic signed [31:0] mech_out,
  output phase_t detune
);
  logic [35:0]        m2;
  logic signed [18:0] pz;
  smp_t               mic1;
  logic signed [31:0] dsum;
  logic signed [79:0] lfd, pzs, mcs, tot;

  always_comb begin
    lfd = (80'(k_lfd) * 80'(signed'({1'b0, m2}))) >>> (2 * (IQ_W - 1));
    pzs = (80'(k_pz) * 80'(pz)) >>> (IQ_W - 1);
    mcs = (80'(k_mic) * 80'(mic1)) >>> (IQ_W - 1);
    tot = lfd + pzs + mcs;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m2 <= '0; pz <= '0; mic1 <= '0; dsum <= '0; detune <= '0;
    end else begin
      m2     <= 36'(probe.i * probe.i) + 36'(probe.q * probe.q);
      pz     <= 19'(piezo1) + 19'(piezo2);
      mic1   <= mic;
      dsum   <= (tot > 80'sh7fff_ffff) ? 32'sh7fff_ffff :
                (tot < -80'sh8000_0000) ? -32'sh8000_0000 : 32'(tot);
      detune <= phase_t'(mech_out + det_const);
    end
  end

  mech_iir u_mech (
    .clk, .rst_n, .en(mech_en), .x(dsum),
    .b0(mech_b0), .b1(mech_b1), .b2(mech_b2), .a1(mech_a1), .a2(mech_a2),
    .y(mech_out)
  );
endmodule
