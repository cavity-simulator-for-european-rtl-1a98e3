// amp_cav_model: the closed simulation model of amplifier, circulator and
// cavity.
//
//   amp_in --> amplifier_model --> amp_fwd --+--> circulator --> amp_refl
//                  ^ ripple                  |        ^   |
//            modulator_gen                   |  cav_refl  v cav_fwd
//                                            |        |   + beam (beam_current)
//                                            |        |   v
//                                            |        +-- cavity_model --> probe
//                                            |     probe - drive   ^ detune
//                       detuning_calc(probe, piezo, microphonics) -+
//
// The cavity is driven by the circulator's cavity-forward wave plus the
// beam current.  The reflected wave of the cavity is the probe minus that
// drive (the "-" input of the original block diagram) and goes back into
// the circulator, which gives the amplifier-reflected wave and, through
// s22, a re-reflected part of the forward wave.  The loop through the
// circulator is broken by a register on cav_refl (this design's choice);
// the drive is delayed by the cavity's 2-clock latency before the
// subtraction.  The mechanical filter of the detuning runs on a strobe
// every mech_dec+1 clocks.
// Timing: amp_in to probe 12 clocks (amplifier 9, circulator 1, cavity 2).
module amp_cav_model
  import cs_pkg::*;
#(
  parameter int NUM_MODES = 6
) (
  input  logic       clk,
  input  logic       rst_n,
  input  model_cfg_t cfg,
  input  logic       trig,
  input  iq_t        amp_in,
  input  iq_t        ref_iq,
  input  smp_t       piezo1,
  input  smp_t       piezo2,
  // table writes
  input  logic       wr_gain,
  input  logic       wr_phase,
  input  logic       wr_mod,
  input  logic       wr_beam,
  input  logic       wr_mic,
  input  logic [TBL_AW-1:0] wr_addr,
  input  logic [31:0] wr_data,
  // outputs
  output iq_t        amp_fwd,
  output iq_t        amp_refl,
  output iq_t        cav_fwd,
  output iq_t        cav_refl,
  output iq_t        probe,
  output iq_t        beam,
  output logic       beam_active,
  output phase_t     detune,
  output logic signed [31:0] piezo_sensor,
  output logic [15:0] mod_dac
);
  smp_t   ripple, mic;
  iq_t    drive, drive_d1, drive_d2;
  logic [15:0] dec_cnt;
  logic   mech_en;
  phase_t mode_offset [NUM_MODES];
  coef_t  coef_a [NUM_MODES], coef_b [NUM_MODES];

  for (genvar m = 0; m < NUM_MODES; m++) begin : g_cfg
    assign mode_offset[m] = cfg.mode_off[m];
    assign coef_a[m]      = coef_t'(cfg.mode_a[m]);
    assign coef_b[m]      = coef_t'(cfg.mode_b[m]);
  end

  modulator_gen u_mod (
    .clk, .rst_n, .trig, .div(cfg.mod_div), .len(cfg.mod_len),
    .wr_en(wr_mod), .wr_addr, .wr_data(wr_data[17:0]), .ripple, .dac(mod_dac)
  );

  amplifier_model u_amp (
    .clk, .rst_n, .x(amp_in), .ripple, .lpf_a(cfg.amp_a), .lpf_b(cfg.amp_b),
    .ka(cfg.mod_ka), .kp(cfg.mod_kp), .wr_gain, .wr_phase, .wr_addr,
    .wr_data(wr_data[17:0]), .y(amp_fwd)
  );

  circulator u_circ (
    .clk, .rst_n, .amp_fwd, .cav_refl, .s11(cfg.s11), .s12(cfg.s12),
    .s21(cfg.s21), .s22(cfg.s22), .cav_fwd, .amp_refl
  );

  beam_current u_beam (
    .clk, .rst_n, .ref_iq, .trig, .beam_phase(cfg.beam_phase), .div(cfg.beam_div),
    .len(cfg.beam_len), .wr_en(wr_beam), .wr_addr, .wr_data(wr_data[17:0]),
    .beam, .active(beam_active)
  );

  assign drive = iq_add(cav_fwd, beam);

  cavity_model #(.NUM_MODES(NUM_MODES)) u_cav (
    .clk, .rst_n, .drive, .detune, .mode_offset, .coef_a, .coef_b, .probe
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drive_d1 <= '0; drive_d2 <= '0; cav_refl <= '0; dec_cnt <= '0; mech_en <= 1'b0;
    end else begin
      drive_d1 <= drive;
      drive_d2 <= drive_d1;
      cav_refl <= iq_sub(probe, drive_d2);
      mech_en  <= (dec_cnt >= cfg.mech_dec);
      dec_cnt  <= (dec_cnt >= cfg.mech_dec) ? '0 : dec_cnt + 1'b1;
    end
  end

  microphonics_gen u_mic (
    .clk, .rst_n, .step(cfg.mic_step), .wr_en(wr_mic), .wr_addr,
    .wr_data(wr_data[17:0]), .mic
  );

  detuning_calc u_det (
    .clk, .rst_n, .probe, .piezo1, .piezo2, .mic,
    .k_lfd(cfg.k_lfd), .k_pz(cfg.k_pz), .k_mic(cfg.k_mic), .det_const(cfg.det_const),
    .mech_en, .mech_b0(cfg.mech_b0), .mech_b1(cfg.mech_b1), .mech_b2(cfg.mech_b2),
    .mech_a1(cfg.mech_a1), .mech_a2(cfg.mech_a2), .mech_out(piezo_sensor), .detune
  );
endmodule
