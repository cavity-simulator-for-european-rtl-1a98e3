// cavity_simulator_top: processing firmware of the cavity simulator.
//
// Data path, following the original firmware block diagram:
//  * the RF drive and RF reference IF samples (16-bit ADCs) are
//    demodulated to baseband IQ by noniq_demod;
//  * an input multiplexer feeds the amplifier/cavity model either with the
//    demodulated drive of the LLRF system under test, or with the output
//    of the internal PID controller (stand-alone closed loop);
//  * amp_cav_model produces amplifier forward/reflected, cavity
//    forward/reflected and the cavity pickup (probe); it also drives the
//    PSU modulator DAC and the piezo-sensor DAC, and takes the two piezo
//    ADCs;
//  * seven vm_buffer stages drive the vector-modulator DACs:
//    0 AUX (AWG or PID), 1 amplifier in, 2 amplifier reflected,
//    3 amplifier forward, 4 cavity forward, 5 cavity reflected,
//    6 cavity pickup;
//  * sync_gen makes the trigger (local or Sync In) for the model, the AWG
//    and the DAQ, which records the seven channels;
//  * cs_regs holds all parameters, written by the host processor.
// The processor, its memories and PHYs are outside this module; their
// connection is the host bus (host_wr/host_rd/host_addr/host_wdata/
// host_rdata; see cs_regs, region 7 reads back the DAQ buffer).
// Timing: one sample per clock (117.4 MHz in the original system).  From
// an RF-drive ADC sample to the cavity-pickup DAC code: 16 clocks
// (demodulator 3, model 12, output stage 1), within the 18-clock budget
// that the 400 ns loop delay leaves after the analog parts.
module cavity_simulator_top
  import cs_pkg::*;
#(
  parameter int NUM_MODES = 6,
  parameter int DEMOD_N   = 14,
  parameter int DEMOD_M   = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  // data converters
  input  logic signed [15:0] adc_drive,
  input  logic signed [15:0] adc_ref,
  input  logic signed [17:0] adc_piezo1,
  input  logic signed [17:0] adc_piezo2,
  output logic signed [15:0] dac_vm_i [7],
  output logic signed [15:0] dac_vm_q [7],
  output logic [15:0] dac_psu_mod,
  output logic [15:0] dac_piezo,
  // synchronisation
  input  logic        sync_in,
  output logic        sync_out,
  // host bus
  input  logic        host_wr,
  input  logic        host_rd,
  input  logic [15:0] host_addr,
  input  logic [31:0] host_wdata,
  output logic [31:0] host_rdata
);
  logic [31:0] regs [NREGS];
  logic [15:0] tbl_we;
  logic [TBL_AW-1:0] tbl_addr;
  logic [31:0] tbl_data, reg_rdata, status;
  model_cfg_t cfg;
  logic [31:0] ctrl;
  logic trig, daq_busy, daq_done, beam_active, awg_running, rd_daq;
  iq_t drive_iq, ref_iq, pid_u, awg_iq, amp_in, aux;
  iq_t amp_fwd, amp_refl, cav_fwd, cav_refl, probe, beam, daq_rd;
  iq_t vm_ch [7];
  phase_t detune;
  logic signed [31:0] piezo_sensor;

  // ----------------------------------------------------------- registers
  assign status = {28'd0, awg_running, beam_active, daq_busy, daq_done};

  cs_regs u_regs (
    .clk, .rst_n, .wr_en(host_wr), .rd_en(host_rd), .addr(host_addr), .wdata(host_wdata),
    .status, .rdata(reg_rdata), .regs, .tbl_we, .tbl_addr, .tbl_data
  );

  assign ctrl = regs[REG_CTRL];

  function automatic cgain_t cg(input logic [31:0] w);
    return '{i: {w[31:16], 2'b00}, q: {w[15:0], 2'b00}};
  endfunction
  function automatic iq_t iqw(input logic [31:0] w);
    return '{i: {w[31:16], 2'b00}, q: {w[15:0], 2'b00}};
  endfunction

  always_comb begin
    cfg.amp_a      = regs[REG_AMP_A];
    cfg.amp_b      = regs[REG_AMP_B];
    cfg.mod_ka     = regs[REG_MOD_KA][17:0];
    cfg.mod_kp     = regs[REG_MOD_KP][17:0];
    cfg.mod_div    = regs[REG_MOD_DIV][15:0];
    cfg.mod_len    = regs[REG_MOD_LEN][TBL_AW-1:0];
    cfg.s11        = cg(regs[REG_S11]);
    cfg.s12        = cg(regs[REG_S12]);
    cfg.s21        = cg(regs[REG_S21]);
    cfg.s22        = cg(regs[REG_S22]);
    cfg.beam_phase = regs[REG_BEAM_PH];
    cfg.beam_div   = regs[REG_BEAM_DIV][15:0];
    cfg.beam_len   = regs[REG_BEAM_LEN][TBL_AW-1:0];
    cfg.k_lfd      = regs[REG_K_LFD];
    cfg.k_pz       = regs[REG_K_PZ];
    cfg.k_mic      = regs[REG_K_MIC];
    cfg.det_const  = regs[REG_DET_CONST];
    cfg.mech_b0    = regs[REG_MECH_B0];
    cfg.mech_b1    = regs[REG_MECH_B1];
    cfg.mech_b2    = regs[REG_MECH_B2];
    cfg.mech_a1    = regs[REG_MECH_A1];
    cfg.mech_a2    = regs[REG_MECH_A2];
    cfg.mech_dec   = regs[REG_MECH_DEC][15:0];
    cfg.mic_step   = regs[REG_MIC_STEP];
    for (int m = 0; m < NUM_MODES_MAX; m++) begin
      cfg.mode_a[m]   = regs[REG_MODE_A + m];
      cfg.mode_b[m]   = regs[REG_MODE_B + m];
      cfg.mode_off[m] = regs[REG_MODE_OFF + m];
    end
  end

  // ------------------------------------------------------- input chain
  noniq_demod #(.N(DEMOD_N), .M(DEMOD_M)) u_dem_drive (.clk, .rst_n, .adc(adc_drive), .iq(drive_iq));
  noniq_demod #(.N(DEMOD_N), .M(DEMOD_M)) u_dem_ref   (.clk, .rst_n, .adc(adc_ref),   .iq(ref_iq));

  sync_gen u_sync (
    .clk, .rst_n, .sync_in, .sel_ext(ctrl[2]), .period(regs[REG_SYNC_PER]),
    .trig, .sync_out
  );

  pid_ctrl u_pid (
    .clk, .rst_n, .clr(!(ctrl[0] || ctrl[1])), .pickup(probe), .setpoint(iqw(regs[REG_PID_SP])),
    .kp(regs[REG_PID_KP][17:0]), .ki(regs[REG_PID_KI][17:0]), .kd(regs[REG_PID_KD][17:0]),
    .u(pid_u)
  );

  assign amp_in = ctrl[0] ? pid_u : drive_iq;

  // --------------------------------------------------------------- model
  amp_cav_model #(.NUM_MODES(NUM_MODES)) u_model (
    .clk, .rst_n, .cfg, .trig, .amp_in, .ref_iq,
    .piezo1(adc_piezo1), .piezo2(adc_piezo2),
    .wr_gain(tbl_we[RGN_GAIN]), .wr_phase(tbl_we[RGN_PHASE]), .wr_mod(tbl_we[RGN_MOD]),
    .wr_beam(tbl_we[RGN_BEAM]), .wr_mic(tbl_we[RGN_MIC]), .wr_addr(tbl_addr), .wr_data(tbl_data),
    .amp_fwd, .amp_refl, .cav_fwd, .cav_refl, .probe, .beam, .beam_active, .detune,
    .piezo_sensor, .mod_dac(dac_psu_mod)
  );

  assign dac_piezo = piezo_sensor[31:16];

  // ----------------------------------------------------------- AUX output
  awg u_awg (
    .clk, .rst_n, .trig, .loop(ctrl[3]), .div(regs[REG_AWG_DIV][15:0]),
    .len(regs[REG_AWG_LEN][TBL_AW-1:0]), .wr_en(tbl_we[RGN_AWG]), .wr_addr(tbl_addr),
    .wr_data(tbl_data), .iq(awg_iq), .running(awg_running)
  );

  assign aux = ctrl[1] ? pid_u : awg_iq;

  // -------------------------------------------------------- output stage
  assign vm_ch[0] = aux;
  assign vm_ch[1] = amp_in;
  assign vm_ch[2] = amp_refl;
  assign vm_ch[3] = amp_fwd;
  assign vm_ch[4] = cav_fwd;
  assign vm_ch[5] = cav_refl;
  assign vm_ch[6] = probe;

  for (genvar c = 0; c < 7; c++) begin : g_vm
    vm_buffer u_vm (
      .clk, .rst_n, .x(vm_ch[c]),
      .off_i(regs[REG_VM_OFF + c][31:16]), .off_q(regs[REG_VM_OFF + c][15:0]),
      .dac_i(dac_vm_i[c]), .dac_q(dac_vm_q[c])
    );
  end

  // ----------------------------------------------------------------- DAQ
  daq #(.NCH(7), .DEPTH(1 << TBL_AW)) u_daq (
    .clk, .rst_n, .arm(ctrl[4]), .trig, .div(regs[REG_DAQ_DIV][15:0]), .ch(vm_ch),
    .rd_ch(regs[REG_DAQ_CH][2:0]), .rd_addr(host_addr[TBL_AW-1:0]), .rd_data(daq_rd),
    .busy(daq_busy), .done(daq_done)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_daq <= 1'b0;
    else        rd_daq <= host_rd && (host_addr[15:12] == RGN_DAQ);

  assign host_rdata = rd_daq ? {daq_rd.i[17:2], daq_rd.q[17:2]} : reg_rdata;
endmodule
