// awg: arbitrary IQ waveform generator for the auxiliary (7th) RF output.
//
// A DEPTH-entry table of complex samples is played from entry 0 on each
// trigger; each entry is held div+1 clocks; after entry len playback
// either wraps (loop = 1, continuous waveform) or stops with a zero
// output (one-shot pulse).  Used to test the simulator by feeding the
// auxiliary output back into its RF input, e.g. an RF pulse for the
// cavity filling and decay test.  The original design states only that
// an arbitrary waveform generator drives the 7th output; table size and
// playback are this design's.
// Interface: table word [31:16] = I, [15:0] = Q, 16-bit signed, scaled
// by 4 to Q1.17.  Timing: iq registered; the first entry appears 2 clocks
// after trig.
module awg
  import cs_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     trig,
  input  logic                     loop,
  input  logic [15:0]              div,
  input  logic [$clog2(DEPTH)-1:0] len,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [31:0]              wr_data,
  output iq_t                      iq,
  output logic                     running
);
  localparam int AW = $clog2(DEPTH);
  logic [AW-1:0] addr;
  logic [15:0]   cnt;
  logic [31:0]   rd;
  logic          run_d;

  table_ram #(.DEPTH(DEPTH), .W(32)) u_tab (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(addr), .rd_data(rd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr <= '0; cnt <= '0; running <= 1'b0; run_d <= 1'b0; iq <= '0;
    end else begin
      if (trig) begin
        addr <= '0; cnt <= '0; running <= 1'b1;
      end else if (running) begin
        if (cnt >= div) begin
          cnt <= '0;
          if (addr >= len) begin
            addr <= '0;
            running <= loop;
          end else addr <= addr + 1'b1;
        end else cnt <= cnt + 1'b1;
      end
      run_d <= running;
      iq.i  <= run_d ? smp_t'({rd[31:16], 2'b00}) : '0;
      iq.q  <= run_d ? smp_t'({rd[15:0], 2'b00}) : '0;
    end
  end
endmodule
