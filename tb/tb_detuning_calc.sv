// Testbench for detuning_calc: with a pass-through mechanical filter the
// detuning must equal k_lfd|probe|^2 + k_pz(p1+p2) + k_mic mic + const
// (integer reference); with a one-pole low-pass loaded, a step of piezo
// drive must settle to the same value with the filter's time constant;
// mech_out is the filtered sum without the constant.
module tb_detuning_calc;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0, mech_en;
  iq_t probe;
  smp_t p1, p2, mic;
  coef_t k_lfd, k_pz, k_mic, det_const, b0, b1, b2, a1, a2;
  logic signed [31:0] mech_out;
  phase_t detune;
  int checks = 0, failures = 0;

  detuning_calc dut (.clk, .rst_n, .probe, .piezo1(p1), .piezo2(p2), .mic,
    .k_lfd, .k_pz, .k_mic, .det_const, .mech_en, .mech_b0(b0), .mech_b1(b1),
    .mech_b2(b2), .mech_a1(a1), .mech_a2(a2), .mech_out, .detune);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expected(input longint c);
    longint m2, s;
    m2 = longint'(probe.i) * probe.i + longint'(probe.q) * probe.q;
    s  = ((longint'(k_lfd) * m2) >>> 34) + ((longint'(k_pz) * (longint'(p1) + p2)) >>> 17)
       + ((longint'(k_mic) * mic) >>> 17);
    return s + c;
  endfunction

  initial begin
    mech_en = 1;
    b0 = C_ONE; b1 = '0; b2 = '0; a1 = '0; a2 = '0;
    probe = '0; p1 = '0; p2 = '0; mic = '0;
    k_lfd = -32'sd3000000; k_pz = 32'sd2000000; k_mic = 32'sd500000; det_const = 32'sd12345;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      probe = iq_t'({$urandom, $urandom}); p1 = smp_t'($urandom); p2 = smp_t'($urandom);
      mic = smp_t'($urandom);
      repeat (5) @(negedge clk);
      checks += 2;
      if (longint'(signed'(detune)) != expected(det_const)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d detune=%0d exp=%0d", n, signed'(detune), expected(det_const));
      end
      if (longint'(mech_out) != expected(0)) failures++;
    end
    // one-pole low-pass y = 0.01 x + 0.99 y[-1]; step of piezo 1
    @(negedge clk);
    probe = '0; p2 = '0; mic = '0; p1 = '0;
    b0 = coef_t'($rtoi(0.01 * 1073741824.0)); a1 = coef_t'(-$rtoi(0.99 * 1073741824.0));
    repeat (3000) @(negedge clk);
    p1 = smp_t'(65536);                          // 0.5 full scale -> 1e6 target
    repeat (103) @(negedge clk);                 // 100 samples + pipeline
    checks++;
    // after 100 samples: 1 - 0.99^100 = 0.634
    if (real'(mech_out) < 0.62e6 || real'(mech_out) > 0.645e6) begin
      failures++; $display("FAIL time constant mech_out=%0d", mech_out);
    end
    repeat (3000) @(negedge clk);
    checks++;
    if (mech_out < 32'sd999000 || mech_out > 32'sd1000001) begin
      failures++; $display("FAIL settle mech_out=%0d", mech_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
