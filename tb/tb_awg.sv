// Testbench for awg: a one-shot pulse plays entries 0..len, each held div+1
// clocks, then zero; loop mode repeats; table word split into I and Q.
module tb_awg;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0, loop = 0, wr_en = 0, running;
  logic [15:0] div;
  logic [9:0] len, wr_addr;
  logic [31:0] wr_data;
  iq_t iq;
  int checks = 0, failures = 0;

  awg dut (.clk, .rst_n, .trig, .loop, .div, .len, .wr_en, .wr_addr, .wr_data, .iq, .running);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] word(input int k);
    return {16'(k * 1000 + 7), 16'(-k * 300 - 1)};
  endfunction

  task automatic expect_entry(input int k);
    checks++;
    if (iq.i != smp_t'({word(k)[31:16], 2'b00}) || iq.q != smp_t'({word(k)[15:0], 2'b00})) begin
      failures++;
      if (failures < 10) $display("FAIL entry %0d iq=(%0d,%0d)", k, iq.i, iq.q);
    end
  endtask

  initial begin
    div = 16'd2; len = 10'd4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'(k); wr_data = word(k);
    end
    @(negedge clk); wr_en = 0;
    checks++;
    if (iq != '0) begin failures++; $display("FAIL output before trigger"); end
    trig = 1; @(negedge clk); trig = 0;
    @(negedge clk);
    for (int n = 0; n < 15; n++) begin
      @(negedge clk);
      expect_entry(n / 3);
    end
    @(negedge clk); @(negedge clk);
    checks++;
    if (iq != '0 || running) begin failures++; $display("FAIL not stopped"); end
    // loop mode
    loop = 1;
    trig = 1; @(negedge clk); trig = 0;
    @(negedge clk);
    for (int n = 0; n < 45; n++) begin
      @(negedge clk);
      expect_entry((n / 3) % 5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
