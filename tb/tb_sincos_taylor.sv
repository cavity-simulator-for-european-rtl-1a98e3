// Testbench for sincos_taylor: random and corner phases, compared with the
// real-number $cos/$sin to within 8 LSB of Q2.30, and the 5-clock latency.
module tb_sincos_taylor;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  phase_t ph;
  coef_t c, s;
  int checks = 0, failures = 0;
  phase_t hist [0:7];

  sincos_taylor dut (.clk, .rst_n, .ph, .cos_o(c), .sin_o(s));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out(input phase_t p);
    real a, ec, es;
    a  = 6.283185307179586 * real'(p) / 4294967296.0;
    ec = real'(c) / 1073741824.0 - $cos(a);
    es = real'(s) / 1073741824.0 - $sin(a);
    checks++;
    if ((ec > 8.0e-9) || (ec < -8.0e-9) || (es > 8.0e-9) || (es < -8.0e-9)) begin
      failures++;
      if (failures < 10) $display("FAIL ph=%h cos=%f sin=%f errc=%e errs=%e", p, real'(c)/1073741824.0, real'(s)/1073741824.0, ec, es);
    end
  endtask

  initial begin
    ph = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // history of driven phases; the output now belongs to the one 5 clocks ago
      if (n >= 5) check_out(hist[(n - 5) % 8]);
      case (n)
        0: ph = 32'h0;
        1: ph = 32'h4000_0000;
        2: ph = 32'h8000_0000;
        3: ph = 32'hC000_0000;
        4: ph = 32'hFFFF_FFFF;
        5: ph = 32'h00FF_FFFF;
        default: ph = $urandom;
      endcase
      hist[n % 8] = ph;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
