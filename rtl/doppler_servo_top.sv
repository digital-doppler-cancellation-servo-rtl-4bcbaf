// doppler_servo_top: digital phase-locked loop that cancels the phase noise
// of a fiber link (Doppler cancellation), plus a free-running reference DDS.
//
// Signal chain, one sample per 125 MHz clock:
//   ADC (14 b) -> complex mixer with the demodulation NCO (20 MHz, or 30 MHz
//   when a 220 MHz beatnote is undersampled) -> two 25-tap FIRs (I and Q,
//   32 b) -> phase detector: the real part (I) is the error -> dynamic
//   shifter (14 b) -> PI loop filter -> added to the 55 MHz centre frequency
//   word -> channel-1 DDS -> DAC ch 1 (frequency-doubled off chip to drive
//   the AOM). Channel 2 is an independent DDS on DAC ch 2.
// The phase detector is the real part of the filtered complex product: near
// lock it is proportional to the sine of the phase offset, so the loop holds
// the beatnote in quadrature with the demodulation NCO. The Q path is kept
// for monitoring only.
//
// Ports: the ADC and DAC sample buses (signed 14-bit), the processor's
// register port (see servo_regs), and monitoring outputs: filtered I and Q,
// the 14-bit error, the corrected channel-1 frequency word and the channel-1
// phase accumulator.
// Timing: ADC input register 1, mixer 1, FIR 2 (+12 samples group delay),
// shifter 1, PI 2, adder 1, DDS 2 (table + DAC register): 10 clocks of
// register latency plus the FIR group delay, 22 clocks (176 ns) from an ADC
// sample to the DAC word it affects.
// The chain and its widths follow the published servo; register latencies
// and the choice of I as the real part are this design's own.
module doppler_servo_top
  import servo_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // converters
  input  adc_t       adc_i,
  output dac_t       dac_ch1_o,
  output dac_t       dac_ch2_o,
  // processor register port
  input  logic       wr_en,
  input  logic [7:0] wr_addr,
  input  logic [31:0] wr_data,
  input  logic [7:0] rd_addr,
  output logic [31:0] rd_data,
  // monitoring
  output fir_out_t   mon_i_o,
  output fir_out_t   mon_q_o,
  output err_t       mon_err_o,
  output ftw_t       mon_ftw_ch1_o,
  output ftw_t       mon_phase_ch1_o
);

  servo_cfg_t               cfg;
  logic                     coef_we;
  logic [$clog2(NTAPS)-1:0] coef_addr;
  coef_t                    coef_data;

  adc_t     adc_q;
  amp_t     lo_sin, lo_cos;
  mix_t     mix_i, mix_q;
  fir_out_t fir_i, fir_q;
  logic     fir_i_sat, fir_q_sat;
  err_t     err;
  logic     shift_ovf;
  lf_out_t  corr;
  logic     lf_sat;
  ftw_t     ftw_ch1;
  ftw_t     phase_ch1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) adc_q <= '0;
    else        adc_q <= adc_i;
  end

  servo_regs u_regs (
    .clk, .rst_n,
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .ev_shift_ovf (shift_ovf),
    .ev_lf_sat    (lf_sat),
    .ev_fir_sat   (fir_i_sat | fir_q_sat),
    .cfg, .coef_we, .coef_addr, .coef_data
  );

  // Demodulation NCO (phase reference phi_0 of the loop).
  nco u_demod_nco (
    .clk, .rst_n, .ftw(cfg.demod_ftw),
    .phase_o(), .sin_o(lo_sin), .cos_o(lo_cos)
  );

  iq_mixer u_mixer (
    .clk, .adc_i(adc_q), .lo_cos, .lo_sin, .i_o(mix_i), .q_o(mix_q)
  );

  fir_filter u_fir_i (
    .clk, .rst_n, .x_i(mix_i),
    .coef_we, .coef_addr, .coef_data, .y_o(fir_i), .sat_o(fir_i_sat)
  );

  fir_filter u_fir_q (
    .clk, .rst_n, .x_i(mix_q),
    .coef_we, .coef_addr, .coef_data, .y_o(fir_q), .sat_o(fir_q_sat)
  );

  // Phase detector: real part of the filtered complex signal.
  dyn_shift u_shift (
    .clk, .rst_n, .d_i(fir_i), .n_i(cfg.shift_n), .q_o(err), .ovf_o(shift_ovf)
  );

  pi_loop_filter u_lf (
    .clk, .rst_n, .en(cfg.loop_en), .e_i(err), .kp_i(cfg.kp), .ki_i(cfg.ki),
    .u_o(corr), .sat_o(lf_sat)
  );

  ftw_adder u_bias (
    .clk, .rst_n, .bias_i(cfg.bias_ftw), .corr_i(corr), .ftw_o(ftw_ch1)
  );

  dds u_dds_ch1 (
    .clk, .rst_n, .ftw(ftw_ch1), .phase_o(phase_ch1), .dac_o(dac_ch1_o)
  );

  dds u_dds_ch2 (
    .clk, .rst_n, .ftw(cfg.ch2_ftw), .phase_o(), .dac_o(dac_ch2_o)
  );

  assign mon_i_o         = fir_i;
  assign mon_q_o         = fir_q;
  assign mon_err_o       = err;
  assign mon_ftw_ch1_o   = ftw_ch1;
  assign mon_phase_ch1_o = phase_ch1;

endmodule
