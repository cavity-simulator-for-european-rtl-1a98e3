// Testbench for circulator: random complex coefficients and samples against
// an integer model of the 2x2 complex matrix product; one-clock latency.
module tb_circulator;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  iq_t af, cr, cf, ar;
  cgain_t s11, s12, s21, s22;
  int checks = 0, failures = 0;
  iq_t ecf, ear;

  circulator dut (.clk, .rst_n, .amp_fwd(af), .cav_refl(cr), .s11, .s12, .s21, .s22,
                  .cav_fwd(cf), .amp_refl(ar));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint satl(input longint v);
    return (v > 131071) ? 131071 : (v < -131072) ? -131072 : v;
  endfunction
  function automatic iq_t ref_mac(input iq_t a, input cgain_t ga, input iq_t b, input cgain_t gb);
    longint ti, tq, ui, uq;
    iq_t r;
    ti = satl((longint'(a.i) * ga.i - longint'(a.q) * ga.q) >>> 16);
    tq = satl((longint'(a.i) * ga.q + longint'(a.q) * ga.i) >>> 16);
    ui = satl((longint'(b.i) * gb.i - longint'(b.q) * gb.q) >>> 16);
    uq = satl((longint'(b.i) * gb.q + longint'(b.q) * gb.i) >>> 16);
    r.i = smp_t'(satl(ti + ui)); r.q = smp_t'(satl(tq + uq));
    return r;
  endfunction

  initial begin
    af = '0; cr = '0; {s11, s12, s21, s22} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (n > 0) begin
        checks += 2;
        if (cf != ecf) begin failures++; if (failures < 10) $display("FAIL cav_fwd n=%0d", n); end
        if (ar != ear) begin failures++; if (failures < 10) $display("FAIL amp_refl n=%0d", n); end
      end
      af = iq_t'({$urandom, $urandom}); cr = iq_t'({$urandom, $urandom});
      s11 = cgain_t'({$urandom, $urandom}); s12 = cgain_t'({$urandom, $urandom});
      s21 = cgain_t'({$urandom, $urandom}); s22 = cgain_t'({$urandom, $urandom});
      if (n % 3 == 0) begin   // small values: no saturation
        af.i = af.i >>> 4; af.q = af.q >>> 4; cr.i = cr.i >>> 4; cr.q = cr.q >>> 4;
      end
      ecf = ref_mac(af, s21, cr, s22);
      ear = ref_mac(af, s11, cr, s12);
    end
    // default matrix of the block diagram: cav_fwd = amp_fwd exactly
    @(negedge clk);
    s21 = '{i: G_ONE, q: '0}; s22 = '0; af = '{i: 18'sd12345, q: -18'sd2222};
    @(negedge clk);
    checks++;
    if (cf != af) begin failures++; $display("FAIL unity path"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
