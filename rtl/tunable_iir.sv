// tunable_iir: first-order complex IIR filter with a tunable centre
// frequency, the digital model of one cavity mode (and, untuned, of the
// amplifier bandwidth).
//
// A parallel LCR resonator near its resonance has the baseband impedance
//   Z(dw) = R_L / (1 + 2j Q_L dw / w0).
// The bilinear transform with sample period T gives
//   Z(z) = R_L (1 + z^-1) / ((K + 1) + (1 - K) z^-1),   K = 4 Q_L / (w0 T),
// i.e. y = b (x + x[-1]) + a y[-1] with a = (K-1)/(K+1), b = R_L/(K+1).
// It is realised here in transposed direct form II with one complex delay
// element s:
//   y[n] = b x[n] + R(s[n-1]),    s[n] = b x[n] + a y[n]
// where R() rotates the delayed pair (I,Q) by the angle wT (cos_wt, sin_wt):
//   I' = cos*I - sin*Q,  Q' = sin*I + cos*Q.
// Replacing z^-1 by z^-1 e^{jwT} moves the resonance by w, which is how
// detuning is applied.  With cos_wt = 1.0 and sin_wt = 0 the filter is the
// plain untuned low-pass.  The transform, the coefficients and the rotated
// delay follow the original model; the single-delay form and the number
// formats are this design's choices.
//
// Interface: x (Q1.17 IQ), a and b (Q2.30), cos_wt/sin_wt (Q2.30).
// State keeps 24 fractional bits below the sample LSB, which is needed for
// loaded Q of order 1e6 (1 - a of about 3e-5).
// Timing: y is registered, one clock after x; a new sample every clock.
module tunable_iir
  import cs_pkg::*;
#(
  parameter int STATE_FRAC = 24
) (
  input  logic  clk,
  input  logic  rst_n,
  input  iq_t   x,
  input  coef_t a,
  input  coef_t b,
  input  coef_t cos_wt,
  input  coef_t sin_wt,
  output iq_t   y
);
  localparam int SF = IQ_W - 1 + STATE_FRAC;     // fraction bits of the state
  localparam int SW = SF + 7;                    // state width, 6 guard bits
  typedef logic signed [SW-1:0] st_t;

  st_t si, sq;                                   // delay element
  logic signed [95:0] bxi, bxq, ri, rq, yi, yq, ayi, ayq;

  always_comb begin
    bxi = (96'(b) * 96'(x.i)) >>> (CF_FRAC + IQ_W - 1 - SF);
    bxq = (96'(b) * 96'(x.q)) >>> (CF_FRAC + IQ_W - 1 - SF);
    ri  = (96'(si) * 96'(cos_wt) - 96'(sq) * 96'(sin_wt)) >>> CF_FRAC;
    rq  = (96'(si) * 96'(sin_wt) + 96'(sq) * 96'(cos_wt)) >>> CF_FRAC;
    yi  = bxi + ri;
    yq  = bxq + rq;
    ayi = (96'(a) * yi) >>> CF_FRAC;
    ayq = (96'(a) * yq) >>> CF_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      si <= '0; sq <= '0; y <= '0;
    end else begin
      si  <= st_t'(bxi + ayi);
      sq  <= st_t'(bxq + ayq);
      y.i <= sat_smp(80'(yi >>> STATE_FRAC));
      y.q <= sat_smp(80'(yq >>> STATE_FRAC));
    end
  end
endmodule
