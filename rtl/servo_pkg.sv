// servo_pkg: constants and types shared by the digital Doppler-cancellation
// servo.
//
// The widths follow the signal chain of the servo: 14-bit signed ADC and DAC
// samples, a 16-bit signed sine table driven by a 40-bit phase accumulator,
// a 25-tap FIR with 16-bit coefficients and a 32-bit output, and a 14-bit
// error word after the dynamic shifter. Everything runs at one sample per
// clock, 125 MS/s.
//
// The default frequency tuning words are round(f / 125 MHz * 2^40). The
// default FIR taps are a Hamming-windowed sinc low-pass, 25 taps, design
// cutoff 4.5 MHz at 125 MS/s, scaled to a DC gain of 2^15 and rounded:
//   h[k] = round(32768 * w[k] * s[k] / sum_j(w[j] * s[j])),  k = 0..24,
//   s[k] = sinc(2 * 4.5/125 * (k - 12)),  w[k] = 0.54 - 0.46 cos(2 pi k / 24).
// This gives a -3 dB point at 4.0 MHz and at least 46 dB of rejection above
// 14 MHz. The sample widths, the 40-bit accumulator, the 4096-entry table and
// the 25 x 16-bit taps are those of the published servo; the tap values, the
// register map and the loop-filter scaling are this design's own choices.
package servo_pkg;

  localparam int unsigned ADC_W    = 14;   // ADC sample width
  localparam int unsigned DAC_W    = 14;   // DAC sample width
  localparam int unsigned PHASE_W  = 40;   // NCO phase accumulator
  localparam int unsigned LUT_AW   = 12;   // 4096-entry sine table
  localparam int unsigned AMP_W    = 16;   // NCO amplitude
  localparam int unsigned MIX_W    = 14;   // mixer output width
  localparam int unsigned NTAPS    = 25;   // FIR taps
  localparam int unsigned COEF_W   = 16;   // FIR coefficient width
  localparam int unsigned FIR_OUT_W = 32;  // FIR output width
  localparam int unsigned ERR_W    = 14;   // dynamic shifter output width
  localparam int unsigned SHIFT_W  = 6;    // signed shift amount n, -13..18
  localparam int unsigned GAIN_W   = 16;   // PI gains
  localparam int unsigned LF_OUT_W = 32;   // PI output width

  typedef logic [PHASE_W-1:0]         ftw_t;
  typedef logic signed [ADC_W-1:0]    adc_t;
  typedef logic signed [DAC_W-1:0]    dac_t;
  typedef logic signed [AMP_W-1:0]    amp_t;
  typedef logic signed [MIX_W-1:0]    mix_t;
  typedef logic signed [COEF_W-1:0]   coef_t;
  typedef logic signed [FIR_OUT_W-1:0] fir_out_t;
  typedef logic signed [ERR_W-1:0]    err_t;
  typedef logic signed [GAIN_W-1:0]   gain_t;
  typedef logic signed [LF_OUT_W-1:0] lf_out_t;

  // round(f / 125e6 * 2^40)
  localparam ftw_t FTW_20MHZ = 40'd175921860444;
  localparam ftw_t FTW_30MHZ = 40'd263882790666;
  localparam ftw_t FTW_55MHZ = 40'd483785116221;

  localparam coef_t FIR_DEFAULT [NTAPS] = '{
    16'sd37,   16'sd71,   16'sd147,  16'sd287,  16'sd507,
    16'sd810,  16'sd1184, 16'sd1606, 16'sd2038, 16'sd2438,
    16'sd2762, 16'sd2973, 16'sd3046, 16'sd2973, 16'sd2762,
    16'sd2438, 16'sd2038, 16'sd1606, 16'sd1184, 16'sd810,
    16'sd507,  16'sd287,  16'sd147,  16'sd71,   16'sd37
  };

  // Configuration register map (word addresses). A 40-bit frequency word is
  // written low word first; writing the high word commits both halves.
  typedef enum logic [7:0] {
    REG_CTRL      = 8'h00,  // bit 0: loop enable
    REG_DEMOD_LO  = 8'h01,  // demodulation NCO frequency word [31:0]
    REG_DEMOD_HI  = 8'h02,  // demodulation NCO frequency word [39:32]
    REG_BIAS_LO   = 8'h03,  // channel-1 centre frequency word [31:0]
    REG_BIAS_HI   = 8'h04,  // channel-1 centre frequency word [39:32]
    REG_CH2_LO    = 8'h05,  // channel-2 DDS frequency word [31:0]
    REG_CH2_HI    = 8'h06,  // channel-2 DDS frequency word [39:32]
    REG_SHIFT     = 8'h07,  // dynamic shifter n, signed
    REG_KP        = 8'h08,  // proportional gain
    REG_KI        = 8'h09,  // integral gain
    REG_STATUS    = 8'h0A,  // sticky flags; a write clears them
    REG_COEF_BASE = 8'h20   // FIR taps 0..24 at 0x20..0x38
  } reg_addr_e;

  // Run-time configuration handed from the register file to the datapath.
  typedef struct packed {
    logic                 loop_en;
    ftw_t                 demod_ftw;
    ftw_t                 bias_ftw;
    ftw_t                 ch2_ftw;
    logic signed [SHIFT_W-1:0] shift_n;
    gain_t                kp;
    gain_t                ki;
  } servo_cfg_t;

endpackage
