// Testbench for modulator_gen: loads a ramp, checks the hold count, the wrap
// after entry len, the restart on trigger and the DAC code.
module tb_modulator_gen;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0, wr_en = 0;
  logic [15:0] div;
  logic [9:0] len, wr_addr;
  logic [17:0] wr_data;
  smp_t ripple;
  logic [15:0] dac;
  int checks = 0, failures = 0;

  modulator_gen dut (.clk, .rst_n, .trig, .div, .len, .wr_en, .wr_addr, .wr_data, .ripple, .dac);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic smp_t tabv(input int k);
    return smp_t'(k * 1000 - 5000);
  endfunction

  initial begin
    div = 16'd2; len = 10'd9;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 16; k++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'(k); wr_data = 18'(tabv(k));
    end
    @(negedge clk); wr_en = 0; trig = 1;
    @(negedge clk); trig = 0;
    // after the trigger: address 0 for 3 clocks, then 1, ... ; RAM adds 1 clock
    @(negedge clk);
    for (int n = 0; n < 75; n++) begin
      int e;
      e = (n / 3) % 10;
      checks++;
      if (ripple != tabv(e) || dac != 16'(18'(tabv(e)) >> 2)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d ripple=%0d exp=%0d", n, ripple, tabv(e));
      end
      @(negedge clk);
    end
    // restart mid-waveform
    trig = 1; @(negedge clk); trig = 0; @(negedge clk);
    checks++;
    if (ripple != tabv(0)) begin failures++; $display("FAIL restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
