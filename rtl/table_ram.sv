// table_ram: host-writable lookup table with one registered read port.
//
// Used for every waveform and characteristic table of the simulator
// (amplifier gain/phase, PSU ripple, beam profile, microphonics, AWG).
// Written as an array so that it maps to block RAM.  Contents start at
// zero.  Timing: rd_data follows rd_addr by one clock; a write is visible
// to a read of the same address one clock later.
module table_ram #(
  parameter int DEPTH = 1024,
  parameter int W     = 18
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data
);
  logic [W-1:0] mem [DEPTH];

  initial for (int k = 0; k < DEPTH; k++) mem[k] = '0;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
