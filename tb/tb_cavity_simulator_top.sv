// End-to-end testbench of cavity_simulator_top at its default parameters.
//
// The RF drive and reference ADCs receive IF tones at 3/14 of the clock,
// the host bus loads the tables and registers, and the DAC codes are
// checked.  The loaded Q is lowered by register writes (to about 1900) so
// that filling takes a few hundred clocks instead of 10^5.  Each mechanism
// of the model is made to act and is counted: loop latency, cavity
// filling to the drive level, constant detuning, Lorentz-force detuning,
// piezo drive, microphonics, beam loading, PSU ripple, gain compression,
// a second cavity mode, the PID mode switch, external sync, the AWG on the
// AUX output and a DAQ capture.  A mechanism that never happened counts as
// a failure.
module tb_cavity_simulator_top;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] adc_drive, adc_ref;
  logic signed [17:0] adc_piezo1, adc_piezo2;
  logic signed [15:0] dac_vm_i [7], dac_vm_q [7];
  logic [15:0] dac_psu_mod, dac_piezo;
  logic sync_in = 0, sync_out;
  logic host_wr = 0, host_rd = 0;
  logic [15:0] host_addr;
  logic [31:0] host_wdata, host_rdata;
  int checks = 0, failures = 0;
  real amp_drive, ph_drive;
  int n = 0;

  localparam int NMECH = 14;
  int seen [NMECH];
  string mech_name [NMECH] = '{"latency", "filling", "const_detuning", "lorentz_detuning",
    "piezo", "microphonics", "beam_loading", "psu_ripple", "compression", "second_mode",
    "pid_mode", "external_sync", "awg", "daq"};

  cavity_simulator_top dut (.*);
  always #4.26 clk = ~clk;      // 117.4 MHz

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // IF stimulus, 3/14 of the clock
  always @(negedge clk) begin
    n <= n + 1;
    adc_drive <= 16'($rtoi(amp_drive * 32767.0 * $cos(6.283185307179586 * 3.0 * real'(n) / 14.0 + ph_drive)));
    adc_ref   <= 16'($rtoi(0.5 * 32767.0 * $cos(6.283185307179586 * 3.0 * real'(n) / 14.0)));
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); host_wr = 1; host_addr = a; host_wdata = d;
    @(negedge clk); host_wr = 0;
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); host_rd = 1; host_addr = a;
    @(negedge clk); host_rd = 0;
    d = host_rdata;
  endtask

  function automatic real mag(input int c);
    return $sqrt(real'(dac_vm_i[c]) ** 2 + real'(dac_vm_q[c]) ** 2) / 32768.0;
  endfunction

  task automatic chk(input string w, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  localparam int CH_AUX = 0, CH_AIN = 1, CH_AREFL = 2, CH_AFWD = 3, CH_CFWD = 4, CH_CREFL = 5, CH_PROBE = 6;

  initial begin
    real K, m0, m1, m2;
    int lat;
    logic [31:0] d;
    for (int k = 0; k < NMECH; k++) seen[k] = 0;
    amp_drive = 0.0; ph_drive = 0.0; adc_piezo1 = '0; adc_piezo2 = '0;
    host_addr = '0; host_wdata = '0;
    repeat (5) @(posedge clk);
    rst_n = 1;

    // ---- amplifier tables: gain 1.0 up to magnitude 0.75, then compressing
    for (int k = 0; k < 1024; k++) begin
      wr({4'(RGN_GAIN), 2'b0, 10'(k)}, 32'($rtoi(((k < 384) ? 1.0 : 1.0 - 0.0012 * (k - 384)) * 65536.0)));
    end
    // ---- cavity: mode 0 with K = 200 (loaded Q ~ 1900), unity gain
    K = 200.0;
    wr(16'(REG_MODE_A), 32'($rtoi((K - 1.0) / (K + 1.0) * 1073741824.0)));
    wr(16'(REG_MODE_B), 32'($rtoi(1.0 / (K + 1.0) * 1073741824.0)));
    wr(16'(REG_SYNC_PER), 32'd0);             // no local triggers yet

    // ---- latency: far-off-resonance cavity passes a step with gain ~b
    repeat (50) @(negedge clk);
    amp_drive = 0.3;
    lat = 0;
    while (dac_vm_i[CH_PROBE] == 0 && dac_vm_q[CH_PROBE] == 0 && lat < 60) begin
      @(negedge clk); lat++;
    end
    $display("ADC-to-probe-DAC latency: %0d clocks", lat);
    chk("latency below 18 clocks", lat > 0 && lat < 18);
    if (lat > 0 && lat < 18) seen[0]++;

    // ---- filling: probe settles to the drive level (unity gain chain)
    repeat (3000) @(negedge clk);
    m0 = mag(CH_PROBE);
    $display("filled probe %f, drive %f, cavity reflected %f", m0, mag(CH_AIN), mag(CH_CREFL));
    chk("probe equals drive at resonance", m0 > 0.29 && m0 < 0.31);
    chk("amplifier forward equals input", mag(CH_AFWD) > 0.29 && mag(CH_AFWD) < 0.31);
    chk("cavity reflected ~0 at resonance", mag(CH_CREFL) < 0.01);
    if (m0 > 0.29) seen[1]++;

    // ---- constant detuning by one half bandwidth: |H| = 1/sqrt(2)
    // half bandwidth in rad/sample: (1-a)/(1+a)*2 ~ 2/K -> tan(w/2) = 1/K
    wr(16'(REG_DET_CONST), 32'(longint'(2.0 * $atan(1.0 / K) / 6.283185307179586 * 4294967296.0)));
    repeat (3000) @(negedge clk);
    m1 = mag(CH_PROBE);
    $display("detuned probe %f (expected %f)", m1, 0.3 / $sqrt(2.0));
    chk("half-bandwidth detuning", m1 > 0.205 && m1 < 0.22);
    chk("cavity reflected appears when detuned", mag(CH_CREFL) > 0.1);
    if (m1 < 0.22) seen[2]++;

    // ---- Lorentz force: k_lfd pulls the resonance back towards the carrier
    wr(16'(REG_K_LFD), -32'(longint'(2.0 * $atan(1.0 / K) / 6.283185307179586 * 4294967296.0 / 0.09)));
    repeat (3000) @(negedge clk);
    m2 = mag(CH_PROBE);
    $display("with Lorentz-force detuning probe %f", m2);
    chk("LFD compensates the detuning", m2 > m1 + 0.03);
    if (m2 > m1 + 0.03) seen[3]++;
    wr(16'(REG_K_LFD), 32'd0);
    wr(16'(REG_DET_CONST), 32'd0);

    // ---- piezo: ADC sum reaches the detuning and the piezo-sensor DAC
    wr(16'(REG_K_PZ), 32'h0100_0000);
    adc_piezo1 = 18'sd30000; adc_piezo2 = 18'sd10000;
    repeat (50) @(negedge clk);
    // k_pz * 40000/2^17 = 2^24 * 0.305 -> dac_piezo = that / 2^16
    $display("piezo sensor DAC %0d", signed'(dac_piezo));
    chk("piezo sensor output", signed'(dac_piezo) == 16'sd78);
    if (dac_piezo != 0) seen[4]++;
    adc_piezo1 = '0; adc_piezo2 = '0;
    wr(16'(REG_K_PZ), 32'd0);

    // ---- microphonics: sine table, drives the piezo sensor periodically
    for (int k = 0; k < 1024; k++)
      wr({4'(RGN_MIC), 2'b0, 10'(k)}, 32'($rtoi(100000.0 * $sin(6.283185307179586 * k / 1024.0))));
    wr(16'(REG_K_MIC), 32'h0100_0000);
    wr(16'(REG_MIC_STEP), 32'h0010_0000);      // period 4096 clocks
    begin
      int mn, mx;
      mn = 1 << 20; mx = -(1 << 20);
      repeat (4200) begin
        @(negedge clk);
        if (int'(signed'(dac_piezo)) < mn) mn = int'(signed'(dac_piezo));
        if (int'(signed'(dac_piezo)) > mx) mx = int'(signed'(dac_piezo));
      end
      $display("microphonics piezo sensor range %0d .. %0d", mn, mx);
      chk("microphonics swing", mx > 150 && mn < -150);
      if (mx > 150) seen[5]++;
    end
    wr(16'(REG_K_MIC), 32'd0);
    wr(16'(REG_MIC_STEP), 32'd0);

    // ---- beam loading: negative beam of 0.1 during a 512-sample pulse
    for (int k = 0; k < 1024; k++) wr({4'(RGN_BEAM), 2'b0, 10'(k)}, 32'(-26214));  // -0.2 x ref 0.5
    wr(16'(REG_BEAM_LEN), 32'd511);
    wr(16'(REG_SYNC_PER), 32'd100000);
    begin
      int waited;
      waited = 0;
      rd(16'(REG_STATUS), d);
      while (!d[2] && waited < 200000) begin rd(16'(REG_STATUS), d); waited++; end
      repeat (400) @(negedge clk);
      m1 = mag(CH_PROBE);
      rd(16'(REG_STATUS), d);
      $display("probe during beam %f (status %h)", m1, d);
      chk("beam reduces the probe", d[2] && m1 > 0.19 && m1 < 0.21);
      if (d[2] && m1 < 0.25) seen[6]++;
    end
    wr(16'(REG_SYNC_PER), 32'd0);
    repeat (3000) @(negedge clk);
    chk("probe recovers after the beam pulse", mag(CH_PROBE) > 0.29);

    // ---- PSU ripple: +10 % ripple -> +12.5 % amplifier output
    for (int k = 0; k < 1024; k++) wr({4'(RGN_MOD), 2'b0, 10'(k)}, 32'(13107));
    repeat (30) @(negedge clk);
    m1 = mag(CH_AFWD);
    $display("amplifier forward with ripple %f, PSU DAC %0d", m1, signed'(dac_psu_mod));
    chk("ripple gain 1 + 5/4 * 0.1", m1 > 0.335 && m1 < 0.34);
    chk("PSU modulator DAC", dac_psu_mod == 16'(13107 >> 2));
    if (m1 > 0.33) seen[7]++;
    for (int k = 0; k < 1024; k++) wr({4'(RGN_MOD), 2'b0, 10'(k)}, 32'(0));

    // ---- compression: drive 0.95 lands in the compressed part of the table
    amp_drive = 0.95;
    repeat (100) @(negedge clk);
    m1 = mag(CH_AFWD) / mag(CH_AIN);
    $display("amplifier gain at 0.95 input %f", m1);
    chk("gain compression", m1 < 0.9 && m1 > 0.5);
    if (m1 < 0.9) seen[8]++;
    amp_drive = 0.3;

    // ---- second mode: 0.2 rad/sample away, same gain; adds a small
    //      off-resonance contribution to the probe
    wr(16'(REG_MODE_A + 1), 32'($rtoi((K - 1.0) / (K + 1.0) * 1073741824.0)));
    wr(16'(REG_MODE_B + 1), 32'($rtoi(1.0 / (K + 1.0) * 1073741824.0)));
    wr(16'(REG_MODE_OFF + 1), 32'(longint'(0.02 / 6.283185307179586 * 4294967296.0)));
    repeat (3000) @(negedge clk);
    m1 = mag(CH_PROBE);
    $display("probe with two modes %f", m1);
    chk("second mode adds to the probe", m1 > 0.305);
    if (m1 > 0.305) seen[9]++;
    wr(16'(REG_MODE_B + 1), 32'd0);

    // ---- PID mode: the model is driven by the internal controller
    wr(16'(REG_PID_SP), {16'd8192, 16'd0});       // setpoint 0.125 + j0
    wr(16'(REG_PID_KP), 32'd8192);
    wr(16'(REG_PID_KI), 32'd200);
    wr(16'(REG_CTRL), 32'h1);
    amp_drive = 0.0;
    repeat (20000) @(negedge clk);
    $display("PID closed loop probe (%0d, %0d)", dac_vm_i[CH_PROBE], dac_vm_q[CH_PROBE]);
    chk("PID holds the setpoint", dac_vm_i[CH_PROBE] > 8000 && dac_vm_i[CH_PROBE] < 8400 &&
        dac_vm_q[CH_PROBE] > -150 && dac_vm_q[CH_PROBE] < 150);
    if (dac_vm_i[CH_PROBE] > 8000) seen[10]++;
    wr(16'(REG_CTRL), 32'h0);
    amp_drive = 0.3;

    // ---- external sync starts the AWG; AWG one-shot on the AUX output;
    //      DAQ captures the channels
    for (int k = 0; k < 16; k++) wr({4'(RGN_AWG), 2'b0, 10'(k)}, {16'(1000 * k), 16'(-500 * k)});
    wr(16'(REG_AWG_LEN), 32'd15);
    wr(16'(REG_CTRL), 32'h4 | 32'h10);            // external sync, arm DAQ
    wr(16'(REG_CTRL), 32'h4);
    repeat (20) @(negedge clk);
    sync_in = 1;
    begin
      int so, aux_nz;
      so = 0; aux_nz = 0;
      for (int k = 0; k < 40; k++) begin
        @(negedge clk);
        if (sync_out) so++;
        if (dac_vm_i[CH_AUX] != 0) aux_nz++;
        if (k == 10) sync_in = 0;
      end
      chk("sync out follows external sync", so == 16);
      if (so > 0) seen[11]++;
      chk("AWG plays 15 non-zero entries", aux_nz == 15);
      if (aux_nz > 0) seen[12]++;
    end
    repeat (1100) @(negedge clk);
    rd(16'(REG_STATUS), d);
    chk("DAQ done", d[0] == 1'b1);
    wr(16'(REG_DAQ_CH), 32'd6);
    rd({4'(RGN_DAQ), 12'd1000}, d);
    $display("DAQ probe sample (%0d, %0d), DAC now (%0d, %0d)", signed'(d[31:16]), signed'(d[15:0]),
             dac_vm_i[CH_PROBE], dac_vm_q[CH_PROBE]);
    chk("DAQ record matches the probe", (int'(signed'(d[31:16])) - int'(dac_vm_i[CH_PROBE])) < 50 &&
        (int'(dac_vm_i[CH_PROBE]) - int'(signed'(d[31:16]))) < 50);
    if (d[0] || signed'(d[31:16]) != 0) seen[13]++;

    for (int k = 0; k < NMECH; k++) begin
      $display("mechanism %-18s happened %0d times", mech_name[k], seen[k]);
      checks++;
      if (seen[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
