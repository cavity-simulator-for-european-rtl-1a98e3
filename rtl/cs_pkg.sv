// Shared types, number formats and register map of the cavity simulator.
//
// Number formats used throughout:
//   iq_t      complex baseband sample, two signed 18-bit Q1.17 values
//             (+/-1.0 full scale), the width of one FPGA DSP multiplier port.
//   phase     32-bit phase word, one full turn = 2^32. A detuning is given
//             as the phase advance per clock sample (like an NCO frequency
//             word): df = word * f_clk / 2^32, 0.027 Hz per LSB at 117.4 MHz.
//   coef      32-bit signed Q2.30 for filter coefficients and sin/cos.
//   gain      18-bit signed Q2.16 for gains and matrix entries.
// These formats are choices of this design; the underlying model does not
// fix them.
//
// The register map (REG_* indices, 32-bit words) is read by the top-level
// module; reg_default() gives every register its reset value.
package cs_pkg;

  localparam int IQ_W   = 18;
  localparam int PH_W   = 32;
  localparam int CF_W   = 32;
  localparam int CF_FRAC = 30;
  localparam int G_W    = 18;
  localparam int G_FRAC = 16;

  typedef logic signed [IQ_W-1:0] smp_t;
  typedef logic signed [CF_W-1:0] coef_t;
  typedef logic signed [G_W-1:0]  gain_t;
  typedef logic        [PH_W-1:0] phase_t;

  typedef struct packed {
    smp_t i;
    smp_t q;
  } iq_t;

  typedef struct packed {
    gain_t i;
    gain_t q;
  } cgain_t;

  localparam smp_t SMP_MAX = smp_t'((1 <<< (IQ_W-1)) - 1);
  localparam smp_t SMP_MIN = smp_t'(-(1 <<< (IQ_W-1)));
  localparam gain_t G_ONE  = gain_t'(1 <<< G_FRAC);
  localparam coef_t C_ONE  = coef_t'(1 <<< CF_FRAC);

  // Saturate a wide signed value to an 18-bit sample.
  function automatic smp_t sat_smp(input logic signed [79:0] v);
    if (v > 80'(signed'(SMP_MAX)))      return SMP_MAX;
    else if (v < 80'(signed'(SMP_MIN))) return SMP_MIN;
    else                                return smp_t'(v);
  endfunction

  // Complex sum with saturation.
  function automatic iq_t iq_add(input iq_t a, input iq_t b);
    iq_t r;
    r.i = sat_smp(80'(a.i) + 80'(b.i));
    r.q = sat_smp(80'(a.q) + 80'(b.q));
    return r;
  endfunction

  function automatic iq_t iq_sub(input iq_t a, input iq_t b);
    iq_t r;
    r.i = sat_smp(80'(a.i) - 80'(b.i));
    r.q = sat_smp(80'(a.q) - 80'(b.q));
    return r;
  endfunction

  // Complex sample times complex Q2.16 gain, saturated.
  function automatic iq_t iq_cmul(input iq_t a, input cgain_t g);
    logic signed [79:0] pi, pq;
    iq_t r;
    pi = (80'(a.i) * 80'(g.i) - 80'(a.q) * 80'(g.q)) >>> G_FRAC;
    pq = (80'(a.i) * 80'(g.q) + 80'(a.q) * 80'(g.i)) >>> G_FRAC;
    r.i = sat_smp(pi);
    r.q = sat_smp(pq);
    return r;
  endfunction

  // ---------------------------------------------------------------- tables
  // Host-writable tables, selected by bits [15:12] of the host address.
  typedef enum logic [3:0] {
    RGN_REGS  = 4'd0,
    RGN_GAIN  = 4'd1,   // amplifier gain LUT      (Q2.16 in [17:0])
    RGN_PHASE = 4'd2,   // amplifier phase LUT     (turn/2^16 in [15:0])
    RGN_MOD   = 4'd3,   // PSU ripple waveform     (Q1.17 in [17:0])
    RGN_BEAM  = 4'd4,   // beam profile            (Q1.17 in [17:0])
    RGN_MIC   = 4'd5,   // microphonics            (Q1.17 in [17:0])
    RGN_AWG   = 4'd6,   // AWG IQ: I in [31:16], Q in [15:0] (x4 to Q1.17)
    RGN_DAQ   = 4'd7    // DAQ read-back: addr[11:10] unused, see top
  } region_e;

  localparam int TBL_AW = 10;   // 1024-entry tables

  // ------------------------------------------------------------ registers
  localparam int NUM_MODES_MAX = 8;
  localparam int NREGS = 128;

  localparam int REG_CTRL       = 0;   // [0] input_sel (1=PID) [1] aux_sel (1=PID)
                                       // [2] sync_ext [3] awg_loop [4] daq_arm
  localparam int REG_SYNC_PER   = 1;
  localparam int REG_AMP_A      = 2;   // amplifier low-pass pole, Q2.30
  localparam int REG_AMP_B      = 3;   // amplifier low-pass gain, Q2.30
  localparam int REG_MOD_KA     = 4;   // ripple->gain coefficient, Q2.16 in [17:0]
  localparam int REG_MOD_KP     = 5;   // ripple->phase coefficient, Q2.16 turns per unit ripple, in [17:0]
  localparam int REG_MOD_DIV    = 6;
  localparam int REG_MOD_LEN    = 7;
  localparam int REG_S11        = 8;   // circulator matrix, [31:16]=I [15:0]=Q (Q2.14 -> Q2.16)
  localparam int REG_S12        = 9;
  localparam int REG_S21        = 10;
  localparam int REG_S22        = 11;
  localparam int REG_BEAM_PH    = 12;
  localparam int REG_BEAM_DIV   = 13;
  localparam int REG_BEAM_LEN   = 14;
  localparam int REG_K_LFD      = 15;
  localparam int REG_K_PZ       = 16;
  localparam int REG_K_MIC      = 17;
  localparam int REG_DET_CONST  = 18;
  localparam int REG_MECH_B0    = 19;
  localparam int REG_MECH_B1    = 20;
  localparam int REG_MECH_B2    = 21;
  localparam int REG_MECH_A1    = 22;
  localparam int REG_MECH_A2    = 23;
  localparam int REG_MECH_DEC   = 24;
  localparam int REG_MIC_STEP   = 25;
  localparam int REG_PID_SP     = 26;  // [31:16]=I [15:0]=Q (x4 to Q1.17)
  localparam int REG_PID_KP     = 27;
  localparam int REG_PID_KI     = 28;
  localparam int REG_PID_KD     = 29;
  localparam int REG_AWG_DIV    = 30;
  localparam int REG_AWG_LEN    = 31;
  localparam int REG_DAQ_DIV    = 32;
  localparam int REG_VM_OFF     = 33;  // 7 words, [31:16]=I [15:0]=Q offsets
  localparam int REG_MODE_A     = 40;  // NUM_MODES_MAX words
  localparam int REG_MODE_B     = 48;
  localparam int REG_MODE_OFF   = 56;
  localparam int REG_STATUS     = 64;  // read-only: [0] daq_done [1] daq_busy [2] beam [3] awg
  localparam int REG_DAQ_CH     = 65;  // DAQ channel shown in the read-back region

  // Parameters of the amplifier and cavity model, decoded from registers.
  typedef struct packed {
    coef_t  amp_a, amp_b;
    gain_t  mod_ka, mod_kp;
    logic [15:0] mod_div;
    logic [TBL_AW-1:0] mod_len;
    cgain_t s11, s12, s21, s22;
    phase_t beam_phase;
    logic [15:0] beam_div;
    logic [TBL_AW-1:0] beam_len;
    coef_t  k_lfd, k_pz, k_mic, det_const;
    coef_t  mech_b0, mech_b1, mech_b2, mech_a1, mech_a2;
    logic [15:0] mech_dec;
    logic [31:0] mic_step;
    logic [NUM_MODES_MAX-1:0][31:0] mode_a, mode_b, mode_off;
  } model_cfg_t;

  // Reset value of a register.  The cavity filter of mode 0 resets to
  // a loaded Q of 7e5 at 704.42 MHz sampled at 117.4 MHz, unity gain at
  // resonance (a = (K-1)/(K+1), b = 1/(K+1), K = 4 Q / (w0 T) = 74272);
  // the other modes reset to zero gain.
  function automatic logic [31:0] reg_default(input int idx);
    case (idx)
      REG_SYNC_PER:  return 32'd1_000_000;
      REG_AMP_A:     return 32'h3a8d_b8bb;          // 0.9149: bandwidth of a few MHz
      REG_AMP_B:     return 32'h02b9_23a3;          // (1-a)/2: unity DC gain
      REG_MOD_KA:    return 32'h0001_4000;          // 1.25 in Q2.16 (dVout/Vout = 5/4 dVk/Vk)
      REG_MOD_DIV:   return 32'd0;
      REG_MOD_LEN:   return 32'd1023;
      REG_S21:       return 32'h4000_0000;          // 1.0 + j0
      REG_BEAM_DIV:  return 32'd0;
      REG_BEAM_LEN:  return 32'd1023;
      REG_MECH_B0:   return 32'(1 << 30);
      REG_MECH_DEC:  return 32'd0;
      REG_AWG_DIV:   return 32'd0;
      REG_AWG_LEN:   return 32'd1023;
      REG_DAQ_DIV:   return 32'd0;
      REG_MODE_A:    return 32'h3fff_8f0e;
      REG_MODE_B:    return 32'h0000_3879;
      default:       return 32'd0;
    endcase
  endfunction

endpackage
