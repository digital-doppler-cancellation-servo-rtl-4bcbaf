// tb_nco: checks the NCO against a model built from the definition:
// a 40-bit accumulator advanced by ftw each clock and a sine of amplitude
// 32767 sampled at the top 12 bits of the phase, cosine a quarter turn ahead.
// Every output sample is compared for several tuning words, including a
// change of frequency on the fly, and the output frequency is checked by
// counting sign changes over a fixed window.
module tb_nco;
  import servo_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  ftw_t ftw;
  ftw_t phase;
  amp_t s, c;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  nco dut (.clk, .rst_n, .ftw, .phase_o(phase), .sin_o(s), .cos_o(c));

  function automatic int ref_sine(longint unsigned p);
    real x;
    int unsigned idx;
    idx = int'(p >> (PHASE_W - LUT_AW));
    x = 32767.0 * $sin(2.0 * 3.14159265358979323846 * real'(idx) / 4096.0);
    return $rtoi(x >= 0.0 ? x + 0.5 : x - 0.5);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned model, prev_model;
  ftw_t ftws [4] = '{FTW_20MHZ, FTW_55MHZ, FTW_30MHZ, 40'h01_2345_6789};
  int sign_changes;
  amp_t last_s;

  initial begin
    ftw = FTW_20MHZ;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    model = 0;
    // sample-by-sample comparison
    for (int f = 0; f < 4; f++) begin
      ftw = ftws[f];
      for (int n = 0; n < 3000; n++) begin
        @(posedge clk);
        #1;
        prev_model = model;
        model = (model + ftw) & ((64'd1 << PHASE_W) - 1);
        check(phase == ftw_t'(model), "accumulator");
        check(int'(s) == ref_sine(prev_model), "sine sample");
        check(int'(c) == ref_sine(prev_model + (64'd1 << (PHASE_W - 2))), "cosine sample");
      end
    end
    // frequency: 55 MHz gives 2 * 55e6 * 1e-3 = 110000 sign changes per ms
    ftw = FTW_55MHZ;
    repeat (4) @(posedge clk);
    sign_changes = 0;
    last_s = s;
    for (int n = 0; n < 125000; n++) begin
      @(posedge clk);
      #1;
      if ((s < 0) != (last_s < 0)) sign_changes++;
      last_s = s;
    end
    check(sign_changes >= 109998 && sign_changes <= 110002, "55 MHz frequency");
    $display("sign changes in 1 ms at 55 MHz: %0d", sign_changes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
