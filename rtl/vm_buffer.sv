// vm_buffer: output stage of one vector-modulator channel.
//
// Converts a Q1.17 IQ sample to the two DAC codes of an I/Q vector
// modulator: the sample is reduced to DAC_W bits, a per-channel offset is
// added to I and Q (calibration of the modulator's carrier leakage), and
// the result saturates to the DAC range.  The original design names this
// stage and mentions IQ offset calibration; its contents are this
// design's.
// Timing: dac_i/dac_q registered, one clock.
module vm_buffer
  import cs_pkg::*;
#(
  parameter int DAC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  iq_t                     x,
  input  logic signed [15:0]      off_i,
  input  logic signed [15:0]      off_q,
  output logic signed [DAC_W-1:0] dac_i,
  output logic signed [DAC_W-1:0] dac_q
);
  localparam longint DMAX = (longint'(1) <<< (DAC_W - 1)) - 1;
  localparam longint DMIN = -(longint'(1) <<< (DAC_W - 1));
  logic signed [31:0] vi, vq;

  always_comb begin
    vi = (32'(x.i) >>> (IQ_W - DAC_W)) + 32'(off_i);
    vq = (32'(x.q) >>> (IQ_W - DAC_W)) + 32'(off_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_i <= '0; dac_q <= '0;
    end else begin
      dac_i <= (vi > 32'(DMAX)) ? DAC_W'(DMAX) : (vi < 32'(DMIN)) ? DAC_W'(DMIN) : DAC_W'(vi);
      dac_q <= (vq > 32'(DMAX)) ? DAC_W'(DMAX) : (vq < 32'(DMIN)) ? DAC_W'(DMIN) : DAC_W'(vq);
    end
  end
endmodule
