// noniq_demod: non-IQ digital down-conversion of an IF ADC stream.
//
// The IF is chosen so that M IF periods fit exactly into N samples
// (IF = M/N f_clk).  With the 117.4 MHz clock, 704.42 MHz RF and a
// 729.58 MHz LO the IF is 25.16 MHz = 3/14 f_clk, hence N = 14, M = 3
// (a 736.44 MHz LO gives 3/11, N = 11).  Each sample is multiplied by
// cos and sin of 2 pi M k / N (a table computed at elaboration) and the
// products are summed over the last N samples:
//   I = 2/N sum x[k] cos(2 pi M k/N),   Q = -2/N sum x[k] sin(2 pi M k/N)
// so that an input A cos(2 pi M k/N + phi) gives I + jQ = A e^{j phi}
// with no image and no residual IF ripple.  The original design states the
// non-IQ scheme only; the sliding-sum realisation is this design's.
// Interface: adc is a signed ADC_W-bit code (full scale = 1.0); iq is Q1.17.
// Timing: iq follows adc by 3 clocks; the window spans N samples, so a
// step settles within N + 3 clocks.
module noniq_demod
  import cs_pkg::*;
#(
  parameter int N     = 14,
  parameter int M     = 3,
  parameter int ADC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] adc,
  output iq_t                     iq
);
  typedef logic signed [17:0] lo_t;
  typedef lo_t lo_tab_t [N];
  localparam int PW = ADC_W + 18;                  // product width
  localparam int AW = PW + $clog2(N) + 1;          // accumulator width

  function automatic lo_tab_t gen_lo(input bit is_sin);
    lo_tab_t t;
    real a;
    for (int k = 0; k < N; k++) begin
      a = 6.283185307179586476925 * real'(M * k) / real'(N);
      t[k] = lo_t'($rtoi((is_sin ? $sin(a) : $cos(a)) * 131071.0));
    end
    return t;
  endfunction
  localparam lo_tab_t COS_T = gen_lo(1'b0);
  localparam lo_tab_t SIN_T = gen_lo(1'b1);
  // 2/N in Q1.17
  localparam logic signed [18:0] SCALE = 19'($rtoi(2.0 / real'(N) * 131072.0 + 0.5));

  logic [$clog2(N)-1:0] k;
  logic signed [PW-1:0] pi_h [N+1], pq_h [N+1];     // products, window plus one
  logic signed [AW-1:0] acc_i, acc_q;
  logic signed [AW+19:0] si, sq;

  always_comb begin
    si = (40'(acc_i) * 40'(SCALE)) >>> (ADC_W - 1 + 17);
    sq = (40'(acc_q) * 40'(SCALE)) >>> (ADC_W - 1 + 17);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0; acc_i <= '0; acc_q <= '0; iq <= '0;
      for (int j = 0; j <= N; j++) begin pi_h[j] <= '0; pq_h[j] <= '0; end
    end else begin
      k <= (k == $bits(k)'(N - 1)) ? '0 : k + 1'b1;
      pi_h[0] <= PW'(adc) * PW'(COS_T[k]);
      pq_h[0] <= -(PW'(adc) * PW'(SIN_T[k]));
      for (int j = 1; j <= N; j++) begin pi_h[j] <= pi_h[j-1]; pq_h[j] <= pq_h[j-1]; end
      acc_i <= acc_i + AW'(pi_h[0]) - AW'(pi_h[N]);
      acc_q <= acc_q + AW'(pq_h[0]) - AW'(pq_h[N]);
      iq.i  <= sat_smp(80'(si));
      iq.q  <= sat_smp(80'(sq));
    end
  end
endmodule
