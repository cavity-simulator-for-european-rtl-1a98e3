// sincos_taylor: cosine and sine of a 32-bit phase word in five clock cycles.
//
// The detuning rotation of the cavity filters and the ROT blocks of the
// model need cos/sin of a phase every clock.  A Taylor series gives the
// result in a fixed, short pipeline, where CORDIC would need one stage per
// bit (5 against 32 cycles for 32-bit resolution, as the original design
// reports).  How the series is arranged is this design's choice: the top
// 8 bits of the phase select a coarse angle A from a 256-entry table
// (computed at elaboration), and the residual angle d < 2*pi/256 is
// expanded as
//     sin d = d - d^3/6            (next term < 1e-10)
//     cos d = 1 - d^2/2 + d^4/24   (next term < 1e-12)
// and combined with cos(A+d) = cosA cosd - sinA sind, sin(A+d) = sinA cosd
// + cosA sind.  Error is a few LSB of the Q2.30 outputs.
//
// Interface: ph is the phase, 2^32 = one turn; cos_o/sin_o are Q2.30.
// Timing: fully pipelined, one result per clock, LATENCY = 5 clocks from
// ph to cos_o/sin_o. 
module sincos_taylor
  import cs_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  phase_t ph,
  output coef_t  cos_o,
  output coef_t  sin_o
);
  localparam int LATENCY = 5;
  localparam int TF = 40;                       // table fraction bits
  localparam int DF = 48;                       // residual fraction bits
  typedef logic signed [TF+1:0] tab_e_t;
  typedef tab_e_t tab_t [256];

  function automatic tab_t gen_tab(input bit is_sin);
    tab_t t;
    real a;
    for (int k = 0; k < 256; k++) begin
      a = 6.283185307179586476925 * real'(k) / 256.0;
      t[k] = tab_e_t'(longint'((is_sin ? $sin(a) : $cos(a)) * 1099511627776.0));
    end
    return t;
  endfunction

  localparam tab_t COS_T = gen_tab(1'b0);
  localparam tab_t SIN_T = gen_tab(1'b1);

  // 2*pi in Q3.37
  localparam logic [39:0] TWO_PI_Q37 = 40'(longint'(6.283185307179586476925 * 137438953472.0));
  // 1/6 and 1/24 in Q0.48
  localparam logic [63:0] INV6  = 64'(longint'(281474976710656.0 / 6.0));
  localparam logic [63:0] INV24 = 64'(longint'(281474976710656.0 / 24.0));
  localparam logic [63:0] ONE_D = 64'(1) << DF;

  // stage 1: table read, residual to radians
  tab_e_t   c1, s1;
  logic [63:0] d1;
  // stage 2
  tab_e_t   c2, s2;
  logic [63:0] d2, dd2;
  // stage 3
  tab_e_t   c3, s3;
  logic [63:0] d3, dd3, ddd3, d4_3;
  // stage 4
  tab_e_t   c4, s4;
  logic signed [63:0] sd4, cd4;

  logic [127:0] prod_d1, p_dd, p_ddd, p_d4, p_i6, p_i24;
  logic signed [127:0] pcc, pss, psc, pcs;

  always_comb begin
    prod_d1 = 128'(ph[23:0]) * 128'(TWO_PI_Q37);          // 32+37 fraction bits
    p_dd    = 128'(d1) * 128'(d1);
    p_ddd   = 128'(dd2) * 128'(d2);
    p_d4    = 128'(dd2) * 128'(dd2);
    p_i6    = 128'(ddd3) * 128'(INV6);
    p_i24   = 128'(d4_3) * 128'(INV24);
    pcc = 128'(c4) * 128'(cd4);
    pss = 128'(s4) * 128'(sd4);
    psc = 128'(s4) * 128'(cd4);
    pcs = 128'(c4) * 128'(sd4);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1 <= '0; s1 <= '0; d1 <= '0;
      c2 <= '0; s2 <= '0; d2 <= '0; dd2 <= '0;
      c3 <= '0; s3 <= '0; d3 <= '0; dd3 <= '0; ddd3 <= '0; d4_3 <= '0;
      c4 <= '0; s4 <= '0; sd4 <= '0; cd4 <= '0;
      cos_o <= '0; sin_o <= '0;
    end else begin
      c1 <= COS_T[ph[31:24]];
      s1 <= SIN_T[ph[31:24]];
      d1 <= 64'(prod_d1 >> (32 + 37 - DF));
      c2 <= c1; s2 <= s1; d2 <= d1;
      dd2 <= 64'(p_dd >> DF);
      c3 <= c2; s3 <= s2; d3 <= d2; dd3 <= dd2;
      ddd3 <= 64'(p_ddd >> DF);
      d4_3 <= 64'(p_d4 >> DF);
      c4 <= c3; s4 <= s3;
      sd4 <= signed'(d3) - signed'(64'(p_i6 >> DF));
      cd4 <= signed'(ONE_D) - signed'(dd3 >> 1) + signed'(64'(p_i24 >> DF));
      cos_o <= coef_t'((pcc - pss) >>> (TF + DF - CF_FRAC));
      sin_o <= coef_t'((psc + pcs) >>> (TF + DF - CF_FRAC));
    end
  end
endmodule
