// tb_iq_mixer: random ADC samples and LO values (including the extreme codes)
// are applied; each output must equal floor(adc * lo / 2^15) one clock later.
module tb_iq_mixer;
  import servo_pkg::*;

  logic clk = 1'b0;
  adc_t adc;
  amp_t lc, ls;
  mix_t yi, yq;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  iq_mixer dut (.clk, .adc_i(adc), .lo_cos(lc), .lo_sin(ls), .i_o(yi), .q_o(yq));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int a, c, s;
  longint ei, eq;

  initial begin
    for (int n = 0; n < 20000; n++) begin
      case (n % 5)
        0: begin a = -8192; c = 32767;  s = -32767; end
        1: begin a = 8191;  c = -32767; s = 32767;  end
        default: begin
          a = int'($urandom_range(16383)) - 8192;
          c = int'($urandom_range(65534)) - 32767;
          s = int'($urandom_range(65534)) - 32767;
        end
      endcase
      adc = adc_t'(a); lc = amp_t'(c); ls = amp_t'(s);
      // floor division by 2^15 computed with longint
      ei = longint'(a) * longint'(c);
      eq = longint'(a) * longint'(s);
      ei = (ei >= 0) ? ei / 32768 : -((-ei + 32767) / 32768);
      eq = (eq >= 0) ? eq / 32768 : -((-eq + 32767) / 32768);
      @(posedge clk);
      #1;
      checks += 2;
      if (longint'(yi) != ei) begin failures++; if (failures < 10) $display("FAIL I %0d*%0d: %0d vs %0d", a, c, yi, ei); end
      if (longint'(yq) != eq) begin failures++; if (failures < 10) $display("FAIL Q %0d*%0d: %0d vs %0d", a, s, yq, eq); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
