// tb_ftw_adder: random centre words and corrections, including the extreme
// corrections; the output must be (bias + corr * 2^8) mod 2^40 one clock
// later.
module tb_ftw_adder;
  import servo_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  ftw_t bias, ftw;
  lf_out_t corr;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  ftw_adder dut (.clk, .rst_n, .bias_i(bias), .corr_i(corr), .ftw_o(ftw));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef longint unsigned u64_t;
  u64_t expv;
  longint cv;

  initial begin
    bias = '0; corr = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 10000; i++) begin
      @(negedge clk);
      bias = (i % 3 == 0) ? FTW_55MHZ : ftw_t'({$urandom, $urandom});
      case (i % 7)
        0: cv = 64'sd2147483647;
        1: cv = -64'sd2147483648;
        default: cv = longint'(signed'($urandom));
      endcase
      corr = lf_out_t'(cv);
      expv = (u64_t'(bias) + u64_t'(cv * 256)) & ((64'd1 << 40) - 1);
      @(posedge clk);
      #1;
      checks++;
      if (u64_t'(ftw) != expv) begin
        failures++;
        if (failures < 10) $display("FAIL bias=%h corr=%0d got %h exp %h", bias, cv, ftw, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
