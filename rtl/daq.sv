// daq: data acquisition of the simulated RF signals.
//
// Records the IQ samples of NCH channels (the seven RF outputs) into an
// on-chip buffer of DEPTH samples per channel.  A write to arm prepares a
// capture; the next trigger starts it; one sample of every channel is
// stored every div+1 clocks until the buffer is full, then done is set.
// The host reads a sample back through rd_ch/rd_addr.  In the original
// design the records go to DDR4 memory through a memory controller; the
// on-chip buffer and the arm/trigger protocol are this design's.
// Timing: rd_data follows rd_ch/rd_addr by one clock.  The first stored
// sample is the one present in the clock after the trigger.
module daq
  import cs_pkg::*;
#(
  parameter int NCH   = 7,
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     arm,
  input  logic                     trig,
  input  logic [15:0]              div,
  input  iq_t                      ch [NCH],
  input  logic [$clog2(NCH)-1:0]   rd_ch,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output iq_t                      rd_data,
  output logic                     busy,
  output logic                     done
);
  localparam int AW = $clog2(DEPTH);
  iq_t mem [NCH][DEPTH];
  logic armed;
  logic [AW-1:0] waddr;
  logic [15:0] cnt;
  logic we;

  assign we = busy && (cnt >= div);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= 1'b0; busy <= 1'b0; done <= 1'b0; waddr <= '0; cnt <= '0;
    end else begin
      if (arm) begin armed <= 1'b1; done <= 1'b0; end
      if (armed && trig && !busy) begin
        armed <= 1'b0; busy <= 1'b1; waddr <= '0; cnt <= '0;
      end else if (busy) begin
        if (cnt >= div) begin
          cnt <= '0;
          if (waddr == AW'(DEPTH - 1)) begin busy <= 1'b0; done <= 1'b1; end
          else waddr <= waddr + 1'b1;
        end else cnt <= cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < NCH; c++)
      if (we) mem[c][waddr] <= ch[c];
    rd_data <= mem[rd_ch][rd_addr];
  end
endmodule
