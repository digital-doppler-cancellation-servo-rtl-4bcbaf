// tb_dds: the DAC word must be the 16-bit table sine rounded to 14 bits,
// round(32767 sin(2 pi idx/4096)) -> floor((s + 2) / 4), two clocks after the
// accumulator value, and its frequency must follow the tuning word (sign
// changes counted over 1 ms at 55 MHz and at 20 MHz).
module tb_dds;
  import servo_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  ftw_t ftw, phase;
  dac_t dac;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  dds dut (.clk, .rst_n, .ftw, .phase_o(phase), .dac_o(dac));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_dac(longint unsigned p);
    real x;
    int s, r;
    x = 32767.0 * $sin(2.0 * 3.14159265358979323846 * real'(p >> 28) / 4096.0);
    s = $rtoi(x >= 0.0 ? x + 0.5 : x - 0.5);
    r = (s + 2) >>> 2;
    return (r > 8191) ? 8191 : r;
  endfunction

  task automatic count_freq(ftw_t f, int expect_changes);
    int changes;
    dac_t last;
    @(negedge clk);
    ftw = f;
    repeat (5) @(posedge clk);
    #1;
    last = dac; changes = 0;
    for (int n = 0; n < 125000; n++) begin
      @(posedge clk);
      #1;
      if ((dac < 0) != (last < 0)) changes++;
      last = dac;
    end
    $display("sign changes in 1 ms: %0d (expected %0d)", changes, expect_changes);
    checks++;
    if (changes < expect_changes - 3 || changes > expect_changes + 3) failures++;
  endtask

  longint unsigned ph_hist [3];

  initial begin
    ftw = FTW_55MHZ;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3; k++) ph_hist[k] = 0;
    for (int n = 0; n < 8000; n++) begin
      @(posedge clk);
      #1;
      if (n == 4000) ftw = 40'h00_1234_5678;
      // dac now reflects the accumulator value of two clocks ago
      if (n >= 2) begin
        checks++;
        if (int'(dac) != ref_dac(ph_hist[1])) begin
          failures++;
          if (failures < 10) $display("FAIL dac %0d exp %0d", dac, ref_dac(ph_hist[1]));
        end
      end
      ph_hist[1] = ph_hist[0];
      ph_hist[0] = longint'(phase);
    end
    count_freq(FTW_55MHZ, 110000);
    count_freq(FTW_20MHZ, 40000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
