// mag_estimator: magnitude of a complex sample by "alpha max + beta min".
//
//   |x| ~ ALPHA * max(|I|,|Q|) + BETA * min(|I|,|Q|)
// The defaults 15/16 and 15/32 (Q1.17) are the pair with the smallest RMS
// error (about 1 %, peak about 6 %); the model names the algorithm but not
// the pair.  The estimate addresses the amplifier's gain and phase tables.
// Interface: x is Q1.17 IQ, mag is unsigned Q1.17 (0 .. <2), saturated.
// Timing: registered, one clock.
module mag_estimator
  import cs_pkg::*;
#(
  parameter int unsigned ALPHA = 122880,   // 15/16 in Q1.17
  parameter int unsigned BETA  = 61440     // 15/32 in Q1.17
) (
  input  logic        clk,
  input  logic        rst_n,
  input  iq_t         x,
  output logic [17:0] mag
);
  logic [18:0] ai, aq, mx, mn;
  logic [39:0] est;

  always_comb begin
    ai  = x.i[17] ? 19'(-20'(x.i)) : 19'(x.i);
    aq  = x.q[17] ? 19'(-20'(x.q)) : 19'(x.q);
    mx  = (ai > aq) ? ai : aq;
    mn  = (ai > aq) ? aq : ai;
    est = (40'(mx) * 40'(ALPHA) + 40'(mn) * 40'(BETA)) >> 17;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mag <= '0;
    else        mag <= (est > 40'h3ffff) ? 18'h3ffff : est[17:0];
endmodule
