// tb_servo_bandwidth: measures the open-loop gain of the locked servo and
// from it the lock bandwidth, the phase margin and the total loop delay.
//
// Method: with the loop closed, the plant adds a small phase tone d at
// frequency f to the fiber. The link phase r (what remains of d) and the
// correction c = r - d that the DDS has applied are projected onto
// exp(-j 2 pi f t) over a whole number of tone periods; the open-loop gain
// is then L(f) = -C / R. The tone is stepped over 10 kHz .. 200 kHz; the
// crossover f_c is where |L| passes 1 (log-log interpolation between the two
// neighbouring points), the phase margin is 180 deg + arg L there, and the
// loop delay follows from arg L = -90 deg - 360 deg * f * tau (the DDS
// phase accumulator is the loop's only integrator when ki = 0).
//
// Two configurations are measured, each with its own plant instance (the ADC
// input is switched between them while the loop is open):
//   A: 20 MHz beatnote, demodulation at 20 MHz, kp = 56,
//   B: 220 MHz beatnote undersampled, demodulation at 30 MHz, kp = 100.
// Both use n = 14 and ki = 0. The expected crossover is
//   f_c = 4 * kp * 2^8 * K_d * 125 MHz / 2^40,  K_d ~ 6000 LSB/rad,
// i.e. 39 kHz for A and 70 kHz for B. The plant delay is 125 clocks (1 us)
// for the analog chain and the AOM; the digital path adds its own latency.
// Checks per configuration: f_c within 25 % of the expected value, phase
// margin above 45 deg, loop delay between 1.0 us and 1.3 us, and at least
// 10 dB of suppression (|S| = |1/(1+L)|) at 10 kHz.
module tb_servo_bandwidth;
  import servo_pkg::*;

  localparam real FS = 125.0e6;
  localparam real PI = 3.14159265358979;
  localparam int  NF = 12;
  localparam int  MEAS = 12500;       // 0.1 ms: whole periods of k * 10 kHz
  localparam int  SETTLE = 3000;
  localparam real TONE = 0.05;        // rad

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  adc_t adc, adc_a, adc_b;
  dac_t dac1, dac2;
  logic wr_en;
  logic [7:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  fir_out_t mon_i, mon_q;
  err_t mon_err;
  ftw_t mon_ftw, mon_phase;
  real link_a, dist_a, link_b, dist_b;
  logic sel_b = 1'b0;
  real tone_hz = 0.0, tone_rad = 0.0;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  assign adc = sel_b ? adc_b : adc_a;

  doppler_servo_top dut (
    .clk, .rst_n, .adc_i(adc), .dac_ch1_o(dac1), .dac_ch2_o(dac2),
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .mon_i_o(mon_i), .mon_q_o(mon_q), .mon_err_o(mon_err),
    .mon_ftw_ch1_o(mon_ftw), .mon_phase_ch1_o(mon_phase)
  );

  link_plant #(.F_BEAT_HZ(20.0e6), .F_DOPPLER_HZ(0.0), .VIB_RAD(0.0)) u_plant_a (
    .clk, .rst_n, .phase_ch1_i(mon_phase), .cut_i(1'b0),
    .tone_rad_i(sel_b ? 0.0 : tone_rad), .tone_hz_i(tone_hz), .adc_o(adc_a),
    .link_phase_o(link_a), .dist_phase_o(dist_a)
  );

  link_plant #(.F_BEAT_HZ(220.0e6), .F_DOPPLER_HZ(0.0), .VIB_RAD(0.0)) u_plant_b (
    .clk, .rst_n, .phase_ch1_i(mon_phase), .cut_i(1'b0),
    .tone_rad_i(sel_b ? tone_rad : 0.0), .tone_hz_i(tone_hz), .adc_o(adc_b),
    .link_phase_o(link_b), .dist_phase_o(dist_b)
  );

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = a; wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  function automatic real atan2(real y, real x);
    return $atan2(y, x);
  endfunction

  // Steps the tone over the frequency grid and returns |L| and arg L
  // (degrees, unwrapped towards negative values) at each point.
  real fgrid [NF];
  real mag [NF];
  real ph  [NF];

  task automatic sweep();
    real rr, ri, cr, ci, lr, li, den, w, lnk, dst, p;
    for (int k = 0; k < NF; k++) begin
      tone_hz = fgrid[k];
      tone_rad = TONE;
      repeat (SETTLE) @(posedge clk);
      rr = 0.0; ri = 0.0; cr = 0.0; ci = 0.0;
      for (int i = 0; i < MEAS; i++) begin
        @(posedge clk);
        #1;
        lnk = sel_b ? link_b : link_a;
        dst = sel_b ? dist_b : dist_a;
        w = 2.0 * PI * fgrid[k] * real'(i) / FS;
        rr += lnk * $cos(w);         ri -= lnk * $sin(w);
        cr += (lnk - dst) * $cos(w);  ci -= (lnk - dst) * $sin(w);
      end
      // L = -C / R
      den = rr * rr + ri * ri;
      lr = -(cr * rr + ci * ri) / den;
      li = -(ci * rr - cr * ri) / den;
      mag[k] = $sqrt(lr * lr + li * li);
      p = atan2(li, lr) * 180.0 / PI;
      if (p > 0.0) p -= 360.0;
      if (k > 0) while (p > ph[k-1] + 180.0) p -= 360.0;
      ph[k] = p;
      $display("  f %7.0f Hz  |L| %7.3f  arg L %8.1f deg  |S| %6.3f", fgrid[k], mag[k], ph[k],
               $sqrt(den) / (real'(MEAS) * TONE / 2.0));
    end
    tone_rad = 0.0;
  endtask

  task automatic evaluate(string name, real fc_expect);
    real fc, pm, tau, t;
    int  k0;
    k0 = -1;
    for (int k = 0; k < NF - 1; k++)
      if (k0 < 0 && mag[k] >= 1.0 && mag[k+1] < 1.0) k0 = k;
    check(k0 >= 0, {name, ": |L| crosses 1 inside the sweep"});
    if (k0 >= 0) begin
      t = $ln(mag[k0]) / ($ln(mag[k0]) - $ln(mag[k0+1]));
      fc = $exp($ln(fgrid[k0]) + t * ($ln(fgrid[k0+1]) - $ln(fgrid[k0])));
      pm = 180.0 + ph[k0] + t * (ph[k0+1] - ph[k0]);
      tau = (-(ph[k0] + t * (ph[k0+1] - ph[k0])) - 90.0) / (360.0 * fc);
      $display("%s: crossover %0.1f kHz (expected %0.1f), phase margin %0.1f deg, loop delay %0.3f us",
               name, fc / 1.0e3, fc_expect / 1.0e3, pm, tau * 1.0e6);
      check(fc > 0.75 * fc_expect && fc < 1.25 * fc_expect, {name, ": crossover near the expected value"});
      check(pm > 45.0, {name, ": phase margin above 45 deg"});
      check(tau > 1.0e-6 && tau < 1.3e-6, {name, ": loop delay 1.0 .. 1.3 us"});
      check(mag[0] > 3.16, {name, ": 10 dB suppression at 10 kHz"});
    end
  endtask

  initial begin
    foreach (fgrid[k]) fgrid[k] = 0.0;
    fgrid = '{10.0e3, 20.0e3, 30.0e3, 40.0e3, 50.0e3, 60.0e3,
              70.0e3, 80.0e3, 100.0e3, 120.0e3, 150.0e3, 200.0e3};
    foreach (mag[k]) begin mag[k] = 0.0; ph[k] = 0.0; end
    wr_en = 0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // configuration A: 20 MHz beatnote
    wr(8'h07, 32'd14);
    wr(8'h08, 32'd56);
    wr(8'h09, 32'd0);
    wr(8'h00, 32'd1);
    repeat (20000) @(posedge clk);
    $display("configuration A: 20 MHz beatnote, kp = 56");
    sweep();
    evaluate("A", 4.0 * 56.0 * 256.0 * 6000.0 * FS / 1099511627776.0);

    // configuration B: undersampled 220 MHz beatnote
    wr(8'h00, 32'd0);
    sel_b = 1'b1;
    wr(8'h01, FTW_30MHZ[31:0]);
    wr(8'h02, 32'(FTW_30MHZ[39:32]));
    wr(8'h08, 32'd100);
    wr(8'h00, 32'd1);
    repeat (20000) @(posedge clk);
    $display("configuration B: 220 MHz beatnote undersampled, kp = 100");
    sweep();
    evaluate("B", 4.0 * 100.0 * 256.0 * 6000.0 * FS / 1099511627776.0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
