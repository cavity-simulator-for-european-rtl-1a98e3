// Testbench for microphonics_gen: with step = 2^22 the table is read one
// entry per clock; with step = 2^21 each entry appears twice.
module tb_microphonics_gen;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [31:0] step;
  logic [9:0] wr_addr;
  logic [17:0] wr_data;
  smp_t mic;
  int checks = 0, failures = 0;

  microphonics_gen dut (.clk, .rst_n, .step, .wr_en, .wr_addr, .wr_data, .mic);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic smp_t tabv(input int k);
    return smp_t'((k * 37) % 1024 * 200 - 100000);
  endfunction

  initial begin
    step = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 1024; k++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'(k); wr_data = 18'(tabv(k));
    end
    @(negedge clk); wr_en = 0;
    // accumulator is 0 (step was 0); start stepping
    step = 32'h0040_0000;
    @(negedge clk);            // acc = 0 read at this edge -> mic = tab[0] next
    for (int n = 0; n < 2100; n++) begin
      @(negedge clk);
      checks++;
      if (mic != tabv((n + 1) % 1024)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d mic=%0d exp=%0d", n, mic, tabv((n + 1) % 1024));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
