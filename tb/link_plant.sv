// link_plant: behavioural model (testbench only) of everything outside the
// FPGA that closes the Doppler-cancellation loop: DAC channel 1, frequency
// doubler, AOM (passed twice), the fiber and the photodiode/RF front end
// feeding the ADC.
//
// Phase model: the channel-1 DDS phase, measured against a DDS that would sit
// at its centre word, is multiplied by 4 (x2 in the doubler, x2 for the
// double pass through the AOM) and delayed by DELAY clocks (analog chain and
// AOM, about 1 us). The fiber adds a Doppler frequency F_DOPPLER_HZ and a
// sinusoidal vibration of VIB_RAD at F_VIB_HZ. The beatnote reaching the
// ADC is AMPL * cos(2 pi F_BEAT_HZ t + phi), sampled at FS_HZ and rounded;
// F_BEAT_HZ = 20 MHz stands for the analog down-conversion, 220 MHz for the
// undersampled configuration (it aliases to 30 MHz with phi inverted).
// link_phase_o is the unwrapped phase phi (radians) the end user would see,
// dist_phase_o the fiber disturbance alone. tone_rad_i/tone_hz_i add a
// further sinusoidal phase tone that can be changed during the run (for
// loop-gain measurements); its phase stays continuous when the frequency
// changes. While cut_i is high the DDS has no effect on the link (a broken
// actuator path), so a servo cannot lock.
module link_plant #(
  parameter real     F_BEAT_HZ    = 20.0e6,
  parameter real     FS_HZ        = 125.0e6,
  parameter longint  BIAS_FTW     = 64'd483785116221,
  parameter int      DELAY        = 125,
  parameter real     AMPL         = 6000.0,
  parameter real     F_DOPPLER_HZ = 5.0e3,
  parameter real     VIB_RAD      = 1.0,
  parameter real     F_VIB_HZ     = 500.0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [39:0]        phase_ch1_i,
  input  logic               cut_i,        // actuator path broken
  input  real                tone_rad_i,   // extra phase tone: amplitude
  input  real                tone_hz_i,    //   and frequency, run-time
  output logic signed [13:0] adc_o,
  output real                link_phase_o,
  output real                dist_phase_o  // fiber disturbance alone
);

  localparam real TWO_PI = 2.0 * 3.14159265358979323846;

  real    dds_dev [1024];   // unwrapped 4x DDS phase deviation history
  int     wr_ptr;
  real    dev;
  real    carrier;
  real    step_c;
  real    tone_ph;
  longint n;
  logic [39:0] last_phase;
  logic signed [39:0] dphi;

  initial begin
    for (int i = 0; i < 1024; i++) dds_dev[i] = 0.0;
    wr_ptr = 0; dev = 0.0; carrier = 0.0; n = 0; tone_ph = 0.0;
    last_phase = '0;
    // carrier advance per sample, reduced modulo one turn
    step_c = F_BEAT_HZ / FS_HZ;
    step_c = TWO_PI * (step_c - $floor(step_c));
    adc_o = '0;
    link_phase_o = 0.0;
    dist_phase_o = 0.0;
  end

  always @(posedge clk) begin
    real phi, x, dst;
    if (rst_n) begin
      // DDS deviation from a centre-frequency DDS, in radians of the beatnote
      dphi = signed'(phase_ch1_i - last_phase - 40'(BIAS_FTW));
      if (!cut_i) dev = dev + 4.0 * TWO_PI * real'(dphi) / 1099511627776.0;
      dds_dev[wr_ptr] = dev;
      tone_ph = tone_ph + TWO_PI * tone_hz_i / FS_HZ;
      if (tone_ph > TWO_PI) tone_ph = tone_ph - TWO_PI;
      dst = TWO_PI * F_DOPPLER_HZ * real'(n) / FS_HZ
           + VIB_RAD * $sin(TWO_PI * F_VIB_HZ * real'(n) / FS_HZ)
           + tone_rad_i * $sin(tone_ph);
      phi = dds_dev[(wr_ptr + 1024 - DELAY) % 1024] + dst;
      wr_ptr = (wr_ptr + 1) % 1024;
      carrier = carrier + step_c;
      if (carrier > TWO_PI) carrier = carrier - TWO_PI;
      x = AMPL * $cos(carrier + phi);
      adc_o <= 14'($rtoi(x >= 0.0 ? x + 0.5 : x - 0.5));
      link_phase_o <= phi;
      dist_phase_o <= dst;
      n++;
    end
    last_phase = phase_ch1_i;
  end

endmodule
