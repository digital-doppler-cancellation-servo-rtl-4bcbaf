// tb_doppler_servo_top: end-to-end test of the servo at its default sizes,
// closing the loop through a model of the fiber link (link_plant): a 20 MHz
// beatnote carrying a 5 kHz Doppler shift, a 1 rad / 500 Hz vibration and
// four times the channel-1 DDS phase, delayed by 1 us.
// Sequence and checks:
//   1. open loop with n = 12: the error overflows the 14-bit range, the
//      sticky overflow flag is read back; DAC ch 1 runs at exactly 55 MHz,
//      DAC ch 2 at 20 MHz;
//   2. n = 14: no more overflow;
//   3. loop engaged (PI): after settling, the error stays small, the link
//      phase seen by the user stays still, and the correction equals
//      -5 kHz / 4 on the DDS (the frequency word offset is compared);
//   3b. n lowered to 13 while locked (finer error resolution): still locked,
//       no overflow;
//   4. FIR taps rewritten on the fly (all halved): the loop stays locked;
//   5. loop opened again: the correction returns to zero at once;
//   5b. weak-signal case: a single centre tap of 1 leaves the FIR word at
//       the mixer's 14 bits, and n = -1 adds one LSB: the error must be
//       twice the filtered I, cut to 14 bits, one clock later; then the
//       default taps and n = 14 are restored;
//   6. actuator path cut while the loop is engaged with a large integral
//      gain: the integrator runs into its clamp and the flag is read.
// Each mechanism (overflow, lock switch, n change, tap reload, LSBs added,
// clamp) is counted and a mechanism that never happened counts as a failure.
module tb_doppler_servo_top;
  import servo_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  adc_t adc;
  dac_t dac1, dac2;
  logic wr_en;
  logic [7:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  fir_out_t mon_i, mon_q;
  err_t mon_err;
  ftw_t mon_ftw, mon_phase;
  real link_phase, dist_phase;
  logic cut = 1'b0;
  int checks = 0, failures = 0;
  int n_overflow = 0, n_lock = 0, n_reload = 0, n_clamp = 0, n_shift = 0, n_add = 0;

  always #4 clk = ~clk;

  doppler_servo_top dut (
    .clk, .rst_n, .adc_i(adc), .dac_ch1_o(dac1), .dac_ch2_o(dac2),
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .mon_i_o(mon_i), .mon_q_o(mon_q), .mon_err_o(mon_err),
    .mon_ftw_ch1_o(mon_ftw), .mon_phase_ch1_o(mon_phase)
  );

  link_plant #(.F_BEAT_HZ(20.0e6), .F_DOPPLER_HZ(5.0e3)) u_plant (
    .clk, .rst_n, .phase_ch1_i(mon_phase), .cut_i(cut), .tone_rad_i(0.0), .tone_hz_i(0.0), .adc_o(adc),
    .link_phase_o(link_phase), .dist_phase_o(dist_phase)
  );

  initial begin
    repeat (400000) @(posedge clk);
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

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    rd_addr = a;
    @(posedge clk);
    #1;
    d = rd_data;
  endtask

  // Observe for `len` clocks: largest |error|, peak-to-peak link phase,
  // mean frequency-word offset from the centre word, sign changes of both DACs.
  int    obs_err_max;
  real   obs_ph_min, obs_ph_max, obs_corr_mean, obs_dist_rate;
  int    obs_dac1_changes, obs_dac2_changes;
  task automatic observe(int len);
    real corr_sum, d0;
    dac_t l1, l2;
    obs_err_max = 0; corr_sum = 0.0;
    obs_ph_min = 1.0e9; obs_ph_max = -1.0e9;
    obs_dac1_changes = 0; obs_dac2_changes = 0;
    @(posedge clk); #1;
    l1 = dac1; l2 = dac2;
    d0 = dist_phase;
    for (int i = 0; i < len; i++) begin
      @(posedge clk);
      #1;
      if ((mon_err < 0 ? -int'(mon_err) : int'(mon_err)) > obs_err_max)
        obs_err_max = mon_err < 0 ? -int'(mon_err) : int'(mon_err);
      if (link_phase < obs_ph_min) obs_ph_min = link_phase;
      if (link_phase > obs_ph_max) obs_ph_max = link_phase;
      corr_sum += real'(signed'(mon_ftw - FTW_55MHZ));
      if ((dac1 < 0) != (l1 < 0)) obs_dac1_changes++;
      if ((dac2 < 0) != (l2 < 0)) obs_dac2_changes++;
      l1 = dac1; l2 = dac2;
    end
    obs_corr_mean = corr_sum / real'(len);
    // mean disturbance frequency over the window, in Hz
    obs_dist_rate = (dist_phase - d0) / (2.0 * 3.14159265358979) * 125.0e6 / real'(len);
  endtask

  logic [31:0] v;
  real open_pp, locked_pp, expect_corr;
  int add_bad, add_max;
  fir_out_t prev_i;

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // 1. open loop, n = 12 (reset value)
    rd(8'h07, v); check(v == 32'd12, "reset n read through the top");
    observe(12500);
    open_pp = obs_ph_max - obs_ph_min;
    $display("open loop: max |err| %0d, link phase p-p %f rad", obs_err_max, open_pp);
    // 100 us: 2 * 55 MHz * 100 us and 2 * 20 MHz * 100 us sign changes
    check(obs_dac1_changes >= 10998 && obs_dac1_changes <= 11002, "DAC ch1 at 55 MHz");
    check(obs_dac2_changes >= 3998 && obs_dac2_changes <= 4002, "DAC ch2 at 20 MHz");
    rd(8'h0A, v);
    if (v[0]) n_overflow++;
    check(v[0] == 1'b1, "overflow flagged at n = 12");

    // 2. n = 14 removes the overflow
    wr(8'h07, 32'd14);
    repeat (50) @(posedge clk);
    wr(8'h0A, 32'd0);
    observe(12500);
    rd(8'h0A, v);
    check(v[0] == 1'b0, "no overflow at n = 14");
    $display("open loop at n=14: max |err| %0d", obs_err_max);

    // 3. engage the loop
    wr(8'h08, 32'd28);
    wr(8'h09, 32'd1);
    wr(8'h00, 32'd1);
    n_lock++;
    repeat (40000) @(posedge clk);
    observe(25000);
    locked_pp = obs_ph_max - obs_ph_min;
    // the DDS must move by minus a quarter of the disturbance frequency
    expect_corr = -(obs_dist_rate / 4.0) * 1099511627776.0 / 125.0e6;
    $display("locked: max |err| %0d, link phase p-p %f rad (open %f), mean ftw offset %f (expected %f)",
             obs_err_max, locked_pp, open_pp, obs_corr_mean, expect_corr);
    check(obs_err_max < 600, "error small when locked");
    check(locked_pp < 0.1, "link phase held when locked");
    check(locked_pp * 20.0 < open_pp, "phase noise reduced by more than 20");
    check((obs_corr_mean - expect_corr) < 0.02 * (expect_corr < 0 ? -expect_corr : expect_corr) &&
          (expect_corr - obs_corr_mean) < 0.02 * (expect_corr < 0 ? -expect_corr : expect_corr),
          "correction cancels the Doppler shift (within 2 %)");

    // 3b. finer error resolution once locked: n = 14 -> 13 (error gain x2)
    wr(8'h07, 32'd13);
    n_shift++;
    repeat (20000) @(posedge clk);
    observe(12500);
    $display("locked at n=13: max |err| %0d, link phase p-p %f", obs_err_max, obs_ph_max - obs_ph_min);
    check(obs_err_max < 1200 && (obs_ph_max - obs_ph_min) < 0.1, "still locked after n change");
    rd(8'h0A, v);
    check(v[0] == 1'b0, "no overflow at n = 13 when locked");

    // 4. taps halved on the fly
    for (int k = 0; k < NTAPS; k++) wr(8'h20 + 8'(k), 32'(int'(FIR_DEFAULT[k]) / 2));
    n_reload++;
    repeat (20000) @(posedge clk);
    observe(12500);
    $display("after tap reload: max |err| %0d, link phase p-p %f", obs_err_max, obs_ph_max - obs_ph_min);
    check(obs_err_max < 600 && (obs_ph_max - obs_ph_min) < 0.1, "still locked after tap reload");
    rd(8'h2C, v); check(v == 32'(int'(FIR_DEFAULT[12]) / 2), "centre tap read back");

    // 5. open the loop: correction back to zero
    wr(8'h00, 32'd0);
    n_lock++;
    repeat (10) @(posedge clk);
    #1;
    check(mon_ftw == FTW_55MHZ, "open loop returns to the centre frequency");

    // 5b. weak signal: taps {0, .., 0, 1, 0, .., 0}, one LSB added
    for (int k = 0; k < NTAPS; k++) wr(8'h20 + 8'(k), (k == NTAPS / 2) ? 32'd1 : 32'd0);
    wr(8'h07, 32'hFFFF_FFFF);
    n_shift++;
    repeat (50) @(posedge clk);
    wr(8'h0A, 32'd0);
    add_bad = 0; add_max = 0;
    #1;
    prev_i = mon_i;
    for (int i = 0; i < 5000; i++) begin
      @(posedge clk);
      #1;
      if (mon_err != err_t'(2 * int'(prev_i))) add_bad++;
      if ((prev_i < 0 ? -int'(prev_i) : int'(prev_i)) > add_max)
        add_max = prev_i < 0 ? -int'(prev_i) : int'(prev_i);
      prev_i = mon_i;
    end
    rd(8'h07, v); check(v == 32'hFFFF_FFFF, "n = -1 reads back");
    $display("LSB added: max |I| %0d, mismatches %0d", add_max, add_bad);
    check(add_bad == 0 && add_max > 1000, "error = 2 x filtered I with one LSB added");
    if (add_bad == 0 && add_max > 1000) n_add++;
    for (int k = 0; k < NTAPS; k++) wr(8'h20 + 8'(k), 32'(int'(FIR_DEFAULT[k])));
    wr(8'h07, 32'd14);

    // 6. actuator path cut with the loop engaged: the integrator winds up
    //    against its clamp
    cut = 1'b1;
    wr(8'h0A, 32'd0);
    wr(8'h08, 32'd0);
    wr(8'h09, 32'h7FFF);
    wr(8'h00, 32'd1);
    repeat (30000) @(posedge clk);
    rd(8'h0A, v);
    if (v[1]) n_clamp++;
    check(v[1] == 1'b1, "loop-filter clamp flagged");
    wr(8'h00, 32'd0);

    $display("mechanisms: overflow %0d, lock switch %0d, n change %0d, tap reload %0d, LSBs added %0d, clamp %0d",
             n_overflow, n_lock, n_shift, n_reload, n_add, n_clamp);
    check(n_add > 0, "LSB addition happened");
    check(n_shift > 0, "n change happened");
    check(n_overflow > 0, "overflow happened");
    check(n_lock > 0, "lock switch happened");
    check(n_reload > 0, "tap reload happened");
    check(n_clamp > 0, "clamp happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
