// Testbench for beam_current: a constant reference rotated by a quarter turn
// and scaled by a loaded profile after a trigger; zero before the trigger
// and after the last entry; held div+1 clocks per entry.
module tb_beam_current;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0, wr_en = 0, active;
  iq_t ref_iq, beam;
  phase_t beam_phase;
  logic [15:0] div;
  logic [9:0] len, wr_addr;
  logic [17:0] wr_data;
  int checks = 0, failures = 0;

  beam_current dut (.clk, .rst_n, .ref_iq, .trig, .beam_phase, .div, .len,
                    .wr_en, .wr_addr, .wr_data, .beam, .active);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int prof(input int k);
    return 20000 + 3000 * k;
  endfunction

  initial begin
    int seen_nonzero;
    ref_iq = '{i: 18'sd100000, q: 18'sd0};
    beam_phase = 32'h4000_0000;              // +90 degrees
    div = 16'd1; len = 10'd7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'(k); wr_data = 18'(prof(k));
    end
    @(negedge clk); wr_en = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (beam != '0) begin failures++; $display("FAIL beam before trigger"); end
    trig = 1; @(negedge clk); trig = 0;
    // collect the pulse: 8 entries x 2 clocks
    seen_nonzero = 0;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      if (beam != '0) begin
        int e, k;
        k = seen_nonzero / 2;
        e = int'((longint'(100000) * prof(k)) >>> 17);
        checks++;
        if (beam.i > 1 || beam.i < -1 || int'(beam.q) - e > 2 || e - int'(beam.q) > 2) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d beam=(%0d,%0d) exp=(0,%0d)", k, beam.i, beam.q, e);
        end
        seen_nonzero++;
      end
    end
    checks++;
    if (seen_nonzero != 16) begin failures++; $display("FAIL pulse length %0d", seen_nonzero); end
    checks++;
    if (beam != '0 || active) begin failures++; $display("FAIL beam after pulse"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
