// beam_current: beam-loading current of the bunched beam.
//
// The beam is phase-locked to the RF reference, so its current is the
// demodulated reference IQ rotated by the beam phase and scaled by a beam
// profile: beam = ref * exp(j*beam_phase) * profile[k].  The profile
// table (DEPTH entries, Q1.17, may be negative) starts at entry 0 on each
// sync trigger, advances every div+1 clocks, and after entry len the
// current is zero until the next trigger (one beam pulse per trigger).
// Reference times table and the rotation follow the original model; the
// table size and playback are this design's.
// Timing: beam follows ref_iq by 7 clocks (rotator 6, scaling 1).
module beam_current
  import cs_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  iq_t                      ref_iq,
  input  logic                     trig,
  input  phase_t                   beam_phase,
  input  logic [15:0]              div,
  input  logic [$clog2(DEPTH)-1:0] len,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [17:0]              wr_data,
  output iq_t                      beam,
  output logic                     active
);
  localparam int AW = $clog2(DEPTH);
  logic [AW-1:0] addr;
  logic [15:0]   cnt;
  logic [17:0]   prof;
  logic          act_d;
  iq_t           rot;
  logic signed [79:0] bi, bq;

  table_ram #(.DEPTH(DEPTH), .W(18)) u_tab (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(addr), .rd_data(prof)
  );

  iq_rotator u_rot (.clk, .rst_n, .x(ref_iq), .ph(beam_phase), .y(rot));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr <= '0; cnt <= '0; active <= 1'b0;
    end else if (trig) begin
      addr <= '0; cnt <= '0; active <= 1'b1;
    end else if (active) begin
      if (cnt >= div) begin
        cnt <= '0;
        if (addr >= len) active <= 1'b0;
        else             addr <= addr + 1'b1;
      end else cnt <= cnt + 1'b1;
    end
  end

  always_comb begin
    bi = (80'(rot.i) * 80'(signed'(prof))) >>> (IQ_W - 1);
    bq = (80'(rot.q) * 80'(signed'(prof))) >>> (IQ_W - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beam <= '0; act_d <= 1'b0;
    end else begin
      act_d  <= active;
      beam.i <= act_d ? sat_smp(bi) : '0;
      beam.q <= act_d ? sat_smp(bq) : '0;
    end
  end
endmodule
