// Testbench for sync_gen: local triggers exactly every `period` clocks,
// external triggers 3 clocks after each Sync In rising edge and only then,
// Sync Out stretched to 16 clocks.
module tb_sync_gen;
  logic clk = 0, rst_n = 0, sync_in = 0, sel_ext = 0, trig, sync_out;
  logic [31:0] period;
  int checks = 0, failures = 0;
  int last, ntrig, so_len, so_max;

  sync_gen dut (.clk, .rst_n, .sync_in, .sel_ext, .period, .trig, .sync_out);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sync_out) so_len <= so_len + 1;
    else begin
      if (so_len > so_max) so_max <= so_len;
      so_len <= 0;
    end
  end

  initial begin
    period = 32'd100; so_len = 0; so_max = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    last = -1; ntrig = 0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      if (trig) begin
        if (last >= 0) begin
          checks++;
          if (cyc - last != 100) begin failures++; $display("FAIL period %0d", cyc - last); end
        end
        last = cyc; ntrig++;
      end
    end
    checks++;
    if (ntrig < 9) begin failures++; $display("FAIL only %0d local triggers", ntrig); end
    checks++;
    if (so_max != 16) begin failures++; $display("FAIL sync_out length %0d", so_max); end
    // external
    sel_ext = 1;
    repeat (5) @(negedge clk);
    for (int e = 0; e < 5; e++) begin
      int t0, seen;
      repeat (37 + e) @(negedge clk);
      sync_in = 1; t0 = cyc; seen = 0;
      for (int k = 0; k < 60; k++) begin
        @(negedge clk);
        if (k == 20) sync_in = 0;
        if (trig) begin
          seen++;
          checks++;
          if (cyc - t0 != 3) begin failures++; $display("FAIL ext latency %0d", cyc - t0); end
        end
      end
      checks++;
      if (seen != 1) begin failures++; $display("FAIL %0d triggers for one edge", seen); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
