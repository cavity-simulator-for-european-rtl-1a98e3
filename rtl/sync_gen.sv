// sync_gen: trigger source of the simulator.
//
// The trigger that starts each machine pulse (beam profile, PSU ripple,
// AWG and data acquisition) comes either from a local generator, a
// counter that fires every `period` clocks, or from the external Sync In
// line, which is synchronised with two flip-flops and edge-detected.
// sel_ext selects the source.  The selected trigger is also sent to Sync
// Out, stretched to OUT_LEN clocks, to synchronise other equipment.  Local
// or external trigger and the Sync Out line follow the original design;
// the counter, the synchroniser and the stretch are this design's.
// Timing: trig is a one-clock pulse; from a Sync In rising edge it comes
// 3 clocks later.  period = 0 stops the local generator.
module sync_gen #(
  parameter int OUT_LEN = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sync_in,
  input  logic        sel_ext,
  input  logic [31:0] period,
  output logic        trig,
  output logic        sync_out
);
  logic [31:0] cnt;
  logic        loc;
  logic [2:0]  sh;
  logic [$clog2(OUT_LEN+1)-1:0] str;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; loc <= 1'b0; sh <= '0; trig <= 1'b0; str <= '0; sync_out <= 1'b0;
    end else begin
      loc <= 1'b0;
      if (period == '0) cnt <= '0;
      else if (cnt >= period - 1) begin cnt <= '0; loc <= 1'b1; end
      else cnt <= cnt + 1'b1;
      sh   <= {sh[1:0], sync_in};
      trig <= sel_ext ? (sh[1] & ~sh[2]) : loc;
      if (trig) str <= ($bits(str))'(OUT_LEN);
      else if (str != '0) str <= str - 1'b1;
      sync_out <= trig || (str > 1);
    end
  end
endmodule
