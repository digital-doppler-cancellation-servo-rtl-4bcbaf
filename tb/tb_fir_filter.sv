// tb_fir_filter: checks the 25-tap FIR with its default taps and with taps
// rewritten at run time.
//  - impulse response: an impulse at cycle t must give tap k at t+2+k, and the
//    peak of the symmetric default filter must come within 17 clocks
//    (136 ns at 125 MHz);
//  - random samples against a direct convolution computed in the testbench;
//  - frequency response of the default taps: a 1 MHz tone passes with gain
//    near 1, a 4 MHz tone is within 3 dB, tones from 14 MHz up to Nyquist are
//    at least 40 dB down;
//  - output saturation with all taps at full scale.
module tb_fir_filter;
  import servo_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  mix_t x;
  logic coef_we;
  logic [4:0] coef_addr;
  coef_t coef_data;
  fir_out_t y;
  logic sat;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  fir_filter dut (.clk, .rst_n, .x_i(x), .coef_we, .coef_addr, .coef_data,
                  .y_o(y), .sat_o(sat));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int taps [25];
  int hist [25];

  // Drive x for one clock (at the falling edge) and return the output seen
  // after the following rising edge.
  task automatic step(input int xv, output longint yv);
    @(negedge clk);
    x = mix_t'(xv);
    @(posedge clk);
    #1;
    yv = longint'(y);
  endtask

  task automatic write_tap(int k, int v);
    @(negedge clk);
    coef_we = 1'b1; coef_addr = 5'(k); coef_data = coef_t'(v);
    @(negedge clk);
    coef_we = 1'b0;
    taps[k] = v;
  endtask

  // Amplitude of the steady-state response to a full-scale-ish tone.
  task automatic tone_gain(real f_mhz, output real gain);
    longint yv;
    real peak;
    peak = 0.0;
    for (int n = 0; n < 600; n++) begin
      step($rtoi(8000.0 * $cos(2.0 * 3.14159265358979 * f_mhz / 125.0 * real'(n))), yv);
      if (n > 100 && $itor(yv < 0 ? -yv : yv) > peak) peak = $itor(yv < 0 ? -yv : yv);
    end
    gain = peak / (8000.0 * 32768.0);
  endtask

  longint yv, expv;
  int peak_at;
  longint peak_v;
  real g;

  initial begin
    x = '0; coef_we = 1'b0; coef_addr = '0; coef_data = '0;
    for (int k = 0; k < 25; k++) taps[k] = int'(FIR_DEFAULT[k]);
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // impulse response and latency
    peak_at = -1; peak_v = 0;
    for (int n = 0; n < 40; n++) begin
      step(n == 0 ? 1000 : 0, yv);
      // output after edge n+1 (n counts edges after the impulse was applied)
      expv = (n >= 1 && n - 1 < 25) ? 1000 * longint'(taps[n-1]) : 0;
      check(yv == expv, "impulse response");
      if (yv > peak_v) begin peak_v = yv; peak_at = n + 1; end
    end
    $display("impulse peak %0d clocks after the input (limit 17)", peak_at);
    check(peak_at == 14, "group delay + pipeline = 14 clocks");
    check(peak_at <= 17, "delay within 136 ns");

    // random samples against a direct convolution
    for (int k = 0; k < 25; k++) hist[k] = 0;
    for (int n = 0; n < 3000; n++) begin
      int xv;
      xv = int'($urandom_range(16383)) - 8192;
      step(xv, yv);
      // y after this edge corresponds to samples up to the previous one
      expv = 0;
      for (int k = 0; k < 25; k++) expv += longint'(taps[k]) * longint'(hist[k]);
      check(yv == expv, "random convolution");
      for (int k = 24; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = xv;
    end

    // frequency response of the default taps
    tone_gain(1.0, g);  $display("gain at 1 MHz  %f", g);  check(g > 0.9 && g < 1.05, "1 MHz passband");
    tone_gain(4.0, g);  $display("gain at 4 MHz  %f", g);  check(g > 0.70, "4 MHz within 3 dB");
    for (real f = 14.0; f < 62.0; f += 4.0) begin
      tone_gain(f, g);
      $display("gain at %0.0f MHz %f", f, g);
      check(g < 0.01, "stopband 40 dB");
    end

    // rewrite taps at run time: a pure delay of 3 samples with gain 2
    for (int k = 0; k < 25; k++) write_tap(k, k == 3 ? 2 : 0);
    for (int k = 0; k < 25; k++) hist[k] = 0;
    for (int n = 0; n < 500; n++) begin
      int xv;
      xv = int'($urandom_range(16383)) - 8192;
      step(xv, yv);
      if (n > 30) check(yv == 2 * longint'(hist[3]), "rewritten taps");
      for (int k = 24; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = xv;
    end

    // saturation: all taps at 32767, input at +8191 and -8192
    for (int k = 0; k < 25; k++) write_tap(k, 32767);
    for (int n = 0; n < 30; n++) step(8191, yv);
    check(yv == 64'sd2147483647 && sat, "positive saturation");
    for (int n = 0; n < 30; n++) step(-8192, yv);
    check(yv == -64'sd2147483648 && sat, "negative saturation");
    for (int n = 0; n < 30; n++) step(0, yv);
    check(yv == 0 && !sat, "saturation released");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
