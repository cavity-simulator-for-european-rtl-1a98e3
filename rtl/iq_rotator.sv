// iq_rotator: rotates a complex sample by a phase angle (a "ROT" block of
// the amplifier and beam paths).
//
// The phase word goes through sincos_taylor (5 clocks); the sample is
// delayed by X_DELAY clocks and then multiplied by cos + j sin in one
// registered complex multiply:  y = x * exp(j*2*pi*ph/2^32).
// With the default X_DELAY = 5, x and ph are presented in the same clock
// and y follows 6 clocks later.  A caller whose phase is ready earlier than
// its sample can present the phase 5 - X_DELAY clocks ahead and shorten the
// path.  Outputs saturate to 18 bits.  The internals are this design's own;
// the model only names the rotation.
module iq_rotator
  import cs_pkg::*;
#(
  parameter int X_DELAY = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  iq_t    x,
  input  phase_t ph,
  output iq_t    y
);
  coef_t c, s;
  iq_t   xd [X_DELAY];
  logic signed [79:0] pi, pq;

  sincos_taylor u_sc (.clk, .rst_n, .ph, .cos_o(c), .sin_o(s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < X_DELAY; k++) xd[k] <= '0;
      y <= '0;
    end else begin
      xd[0] <= x;
      for (int k = 1; k < X_DELAY; k++) xd[k] <= xd[k-1];
      y.i <= sat_smp(pi);
      y.q <= sat_smp(pq);
    end
  end

  always_comb begin
    pi = (80'(xd[X_DELAY-1].i) * 80'(c) - 80'(xd[X_DELAY-1].q) * 80'(s)) >>> CF_FRAC;
    pq = (80'(xd[X_DELAY-1].i) * 80'(s) + 80'(xd[X_DELAY-1].q) * 80'(c)) >>> CF_FRAC;
  end
endmodule
