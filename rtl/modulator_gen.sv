// modulator_gen: power-supply (modulator) ripple waveform generator.
//
// Plays a predefined waveform, loaded by the host into a DEPTH-entry table,
// as the relative cathode-voltage ripple dVk/Vk.  Each entry is held for
// div+1 clocks; after entry len the read-out wraps to 0, so the waveform
// repeats, and a sync trigger restarts it at entry 0 so that the ripple is
// locked to the machine pulse.  The ripple drives the amplifier model and,
// as a 16-bit code, the DAC of the PSU modulator output.  The original
// model says only that the ripple is a predefined waveform; table size,
// hold count and restart are this design's choices.
// Interface: ripple Q1.17 signed; dac = ripple[17:2].
// Timing: ripple changes one clock after the read address (registered RAM);
// trig restarts the read address in the next clock.
module modulator_gen
  import cs_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     trig,
  input  logic [15:0]              div,
  input  logic [$clog2(DEPTH)-1:0] len,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [17:0]              wr_data,
  output smp_t                     ripple,
  output logic [15:0]              dac
);
  localparam int AW = $clog2(DEPTH);
  logic [AW-1:0] addr;
  logic [15:0]   cnt;
  logic [17:0]   rd;

  table_ram #(.DEPTH(DEPTH), .W(18)) u_tab (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(addr), .rd_data(rd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr <= '0; cnt <= '0;
    end else if (trig) begin
      addr <= '0; cnt <= '0;
    end else if (cnt >= div) begin
      cnt  <= '0;
      addr <= (addr >= len) ? '0 : addr + 1'b1;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  assign ripple = smp_t'(rd);
  assign dac    = rd[17:2];
endmodule
