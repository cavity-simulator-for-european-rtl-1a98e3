// Testbench for vm_buffer: random samples and offsets against an integer
// model of reduction to 16 bits, offset and saturation; one-clock latency.
module tb_vm_buffer;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  iq_t x;
  logic signed [15:0] off_i, off_q, dac_i, dac_q;
  int checks = 0, failures = 0;
  int ei, eq;

  vm_buffer dut (.clk, .rst_n, .x, .off_i, .off_q, .dac_i, .dac_q);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat16(input int v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  initial begin
    x = '0; off_i = '0; off_q = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n > 0) begin
        checks++;
        if (int'(dac_i) != ei || int'(dac_q) != eq) begin
          failures++;
          if (failures < 10) $display("FAIL dac=(%0d,%0d) exp=(%0d,%0d)", dac_i, dac_q, ei, eq);
        end
      end
      x = iq_t'({$urandom, $urandom});
      off_i = 16'($urandom); off_q = 16'($urandom);
      if (n % 2 == 0) begin off_i = off_i >>> 6; off_q = off_q >>> 6; end
      ei = sat16((int'(x.i) >>> 2) + int'(off_i));
      eq = sat16((int'(x.q) >>> 2) + int'(off_q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
