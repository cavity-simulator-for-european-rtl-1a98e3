// mech_iir: mechanical response of the cavity to the detuning forces.
//
// A real second-order IIR section (direct form I)
//   y = b0 x + b1 x[-1] + b2 x[-2] - a1 y[-1] - a2 y[-2]
// with host-loaded Q2.30 coefficients.  The original model states that
// the transfer function is to be fitted to measurements of real cavities
// and does not give it; a biquad can hold one mechanical resonance or a
// low-pass.  The section updates only when en is high, so that a slow
// mechanical response can run at a decimated rate with usable coefficient
// precision (this strobe is this design's addition).  Reset coefficients
// b0 = 1, others 0, make it a pass-through.
// Interface: x, y signed 32-bit (detuning phase words), saturating.
// Timing: y registered, updated one clock after an en cycle.
module mech_iir
  import cs_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic signed [31:0] x,
  input  coef_t b0,
  input  coef_t b1,
  input  coef_t b2,
  input  coef_t a1,
  input  coef_t a2,
  output logic signed [31:0] y
);
  logic signed [31:0] x1, x2, y1;
  logic signed [79:0] acc;

  always_comb
    acc = (80'(b0) * 80'(x) + 80'(b1) * 80'(x1) + 80'(b2) * 80'(x2)
           - 80'(a1) * 80'(y) - 80'(a2) * 80'(y1)) >>> CF_FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1 <= '0; x2 <= '0; y1 <= '0; y <= '0;
    end else if (en) begin
      x1 <= x;
      x2 <= x1;
      y1 <= y;
      y  <= (acc > 80'sh7fff_ffff) ? 32'sh7fff_ffff :
            (acc < -80'sh8000_0000) ? -32'sh8000_0000 : 32'(acc);
    end
  end
endmodule
