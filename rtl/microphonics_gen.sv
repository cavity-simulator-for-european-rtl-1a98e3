// microphonics_gen: microphonics detuning from a lookup table.
//
// A 32-bit phase accumulator advances by step every clock; its top
// $clog2(DEPTH) bits address a host-loaded table (one period of the
// microphonics waveform), so the waveform repeats at f = step * f_clk /
// 2^32.  The original model says only that microphonics come from a
// lookup table; the accumulator read-out is this design's choice.
// Timing: mic follows the accumulator by one clock (registered RAM).
module microphonics_gen
  import cs_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [31:0]              step,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [17:0]              wr_data,
  output smp_t                     mic
);
  localparam int AW = $clog2(DEPTH);
  logic [31:0] acc;
  logic [17:0] rd;

  table_ram #(.DEPTH(DEPTH), .W(18)) u_tab (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(acc[31 -: AW]), .rd_data(rd)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) acc <= '0;
    else        acc <= acc + step;

  assign mic = smp_t'(rd);
endmodule
