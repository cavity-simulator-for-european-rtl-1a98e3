// circulator: linear model of the circulator and waveguide between the
// amplifier and the cavity.
//
//   cav_fwd  = s21 * amp_fwd + s22 * cav_refl
//   amp_refl = s11 * amp_fwd + s12 * cav_refl
// with four complex coefficients (a 2x2 complex matrix) set by the host.
// In the original block diagram the amplifier forward wave passes to the
// cavity forward port with no coefficient and three coefficients S1..S3
// appear; they correspond to s12 (S1), s22 (S2) and s11 (S3) here, and s21
// resets to 1.0 so that the diagram is the default.
// Interface: Q1.17 IQ samples, Q2.16 complex coefficients.
// Timing: outputs registered, one clock.
module circulator
  import cs_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  iq_t    amp_fwd,
  input  iq_t    cav_refl,
  input  cgain_t s11,
  input  cgain_t s12,
  input  cgain_t s21,
  input  cgain_t s22,
  output iq_t    cav_fwd,
  output iq_t    amp_refl
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cav_fwd <= '0; amp_refl <= '0;
    end else begin
      cav_fwd  <= iq_add(iq_cmul(amp_fwd, s21), iq_cmul(cav_refl, s22));
      amp_refl <= iq_add(iq_cmul(amp_fwd, s11), iq_cmul(cav_refl, s12));
    end
  end
endmodule
