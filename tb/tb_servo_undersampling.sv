// tb_servo_undersampling: the undersampling configuration. The 220 MHz
// beatnote is sampled directly at 125 MS/s; in the second Nyquist zone it
// appears at 2 x 125 - 220 = 30 MHz with its phase inverted. The processor
// retunes the demodulation NCO to 30 MHz and engages the loop; everything
// else is unchanged. Checks: the loop locks (small error, still link phase),
// the DDS correction cancels the fiber Doppler shift (a quarter of it, with
// opposite sign), and the demodulation frequency word reads back as 30 MHz.
module tb_servo_undersampling;
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
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  doppler_servo_top dut (
    .clk, .rst_n, .adc_i(adc), .dac_ch1_o(dac1), .dac_ch2_o(dac2),
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .mon_i_o(mon_i), .mon_q_o(mon_q), .mon_err_o(mon_err),
    .mon_ftw_ch1_o(mon_ftw), .mon_phase_ch1_o(mon_phase)
  );

  link_plant #(.F_BEAT_HZ(220.0e6), .F_DOPPLER_HZ(-3.0e3), .VIB_RAD(2.0), .F_VIB_HZ(300.0)) u_plant (
    .clk, .rst_n, .phase_ch1_i(mon_phase), .cut_i(1'b0), .tone_rad_i(0.0), .tone_hz_i(0.0), .adc_o(adc),
    .link_phase_o(link_phase), .dist_phase_o(dist_phase)
  );

  initial begin
    repeat (200000) @(posedge clk);
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

  int  err_max;
  real ph_min, ph_max, corr_sum, d0, dist_rate, expect_corr, corr_mean;
  logic [31:0] v;

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    wr(8'h01, FTW_30MHZ[31:0]);
    wr(8'h02, 32'(FTW_30MHZ[39:32]));
    rd(8'h01, v); check(v == FTW_30MHZ[31:0], "30 MHz word, low half");
    rd(8'h02, v); check(v == 32'(FTW_30MHZ[39:32]), "30 MHz word, high half");
    wr(8'h07, 32'd14);
    wr(8'h08, 32'd28);
    wr(8'h09, 32'd1);
    wr(8'h00, 32'd1);
    repeat (50000) @(posedge clk);
    err_max = 0; ph_min = 1.0e9; ph_max = -1.0e9; corr_sum = 0.0;
    #1;
    d0 = dist_phase;
    for (int i = 0; i < 25000; i++) begin
      @(posedge clk);
      #1;
      if ((mon_err < 0 ? -int'(mon_err) : int'(mon_err)) > err_max)
        err_max = mon_err < 0 ? -int'(mon_err) : int'(mon_err);
      if (link_phase < ph_min) ph_min = link_phase;
      if (link_phase > ph_max) ph_max = link_phase;
      corr_sum += real'(signed'(mon_ftw - FTW_55MHZ));
    end
    corr_mean = corr_sum / 25000.0;
    dist_rate = (dist_phase - d0) / (2.0 * 3.14159265358979) * 125.0e6 / 25000.0;
    expect_corr = -(dist_rate / 4.0) * 1099511627776.0 / 125.0e6;
    $display("undersampled lock: max |err| %0d, link phase p-p %f rad, ftw offset %f (expected %f)",
             err_max, ph_max - ph_min, corr_mean, expect_corr);
    check(err_max < 600, "error small when locked");
    check(ph_max - ph_min < 0.1, "link phase held");
    check((corr_mean - expect_corr) < 0.02 * (expect_corr < 0 ? -expect_corr : expect_corr) &&
          (expect_corr - corr_mean) < 0.02 * (expect_corr < 0 ? -expect_corr : expect_corr),
          "correction cancels the Doppler shift (within 2 %)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
