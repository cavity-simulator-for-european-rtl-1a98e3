// Testbench for amp_cav_model, the closed amplifier-circulator-cavity loop,
// with two modes.  Unity amplifier gain, an ideal circulator and a cavity
// with a lowered loaded Q (K = 200): at resonance the probe settles to the
// amplifier input and the cavity-reflected wave goes to zero; with s12 set,
// the reflected wave reaches the amplifier-reflected output; a detuning of
// one half bandwidth lowers the probe by sqrt(2); the input-to-probe
// latency is 12 clocks.
module tb_amp_cav_model;
  import cs_pkg::*;
  localparam int NM = 2;
  logic clk = 0, rst_n = 0, trig = 0;
  model_cfg_t cfg;
  iq_t amp_in, ref_iq, amp_fwd, amp_refl, cav_fwd, cav_refl, probe, beam;
  smp_t piezo1, piezo2;
  logic wr_gain = 0, wr_phase = 0, wr_mod = 0, wr_beam = 0, wr_mic = 0;
  logic [TBL_AW-1:0] wr_addr = '0;
  logic [31:0] wr_data = '0;
  logic beam_active;
  phase_t detune;
  logic signed [31:0] piezo_sensor;
  logic [15:0] mod_dac;
  int checks = 0, failures = 0;

  amp_cav_model #(.NUM_MODES(NM)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real m(input iq_t x);
    return $sqrt(real'(x.i) ** 2 + real'(x.q) ** 2) / 131072.0;
  endfunction
  task automatic chk(input string w, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    real K;
    int lat;
    K = 200.0;
    cfg = '0;
    cfg.mod_ka = 18'h14000;
    cfg.amp_a = 32'h3a8d_b8bb; cfg.amp_b = 32'h02b9_23a3;
    cfg.mod_len = 10'd1023; cfg.beam_len = 10'd1023;
    cfg.s21 = '{i: 18'sd65536, q: 18'sd0};
    cfg.mech_b0 = 32'h4000_0000;
    cfg.mode_a[0] = 32'($rtoi((K - 1.0) / (K + 1.0) * 1073741824.0));
    cfg.mode_b[0] = 32'($rtoi(1.0 / (K + 1.0) * 1073741824.0));
    amp_in = '0; ref_iq = '0; piezo1 = '0; piezo2 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 1024; k++) begin
      @(negedge clk); wr_gain = 1; wr_addr = 10'(k); wr_data = 32'd65536;
    end
    @(negedge clk); wr_gain = 0;
    repeat (20) @(negedge clk);
    amp_in = '{i: 18'sd39321, q: 18'sd0};       // 0.3
    lat = 0;
    while (probe == '0 && lat < 40) begin @(negedge clk); lat++; end
    chk("latency 12", lat == 12);
    $display("amp_in to probe latency %0d", lat);
    repeat (3000) @(negedge clk);
    $display("probe %f cav_refl %f amp_fwd %f", m(probe), m(cav_refl), m(amp_fwd));
    chk("probe at drive level", m(probe) > 0.295 && m(probe) < 0.305);
    chk("no reflection at resonance", m(cav_refl) < 0.003);
    chk("amp_fwd", m(amp_fwd) > 0.295 && m(amp_fwd) < 0.305);
    chk("cav_fwd", m(cav_fwd) > 0.295 && m(cav_fwd) < 0.305);
    // detune by one half bandwidth; reflection routed through s12
    cfg.s12 = '{i: 18'sd65536, q: 18'sd0};
    cfg.det_const = 32'(longint'(2.0 * $atan(1.0 / K) / 6.283185307179586 * 4294967296.0));
    repeat (3000) @(negedge clk);
    $display("detuned probe %f cav_refl %f amp_refl %f", m(probe), m(cav_refl), m(amp_refl));
    chk("detuned probe 0.3/sqrt2", m(probe) > 0.207 && m(probe) < 0.217);
    chk("detuned reflection |1/(1+j)-1|*0.3", m(cav_refl) > 0.207 && m(cav_refl) < 0.217);
    chk("amp_refl through s12", m(amp_refl) > 0.207 && m(amp_refl) < 0.217);
    chk("detune output", detune == cfg.det_const);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
