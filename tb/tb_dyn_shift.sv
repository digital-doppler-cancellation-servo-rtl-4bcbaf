// tb_dyn_shift: for random 32-bit words (mixed magnitudes) and every signed
// n from -32 to 31, the output must be, one clock later, bits [n+13:n] of
// the input for n >= 0 (n above 18 acting as 18) and the input followed by
// -n zero bits for n < 0 (n below -13 acting as -13), cut to 14 bits. The
// overflow flag must be set exactly when the input times 2^-n falls outside
// the signed 14-bit range. Both shift directions must occur, with and
// without overflow.
module tb_dyn_shift;
  import servo_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  fir_out_t d;
  logic signed [5:0] n;
  err_t q;
  logic ovf;
  int checks = 0, failures = 0;
  int ovf_seen = 0, add_seen = 0, add_ok_seen = 0;

  always #4 clk = ~clk;

  dyn_shift dut (.clk, .rst_n, .d_i(d), .n_i(n), .q_o(q), .ovf_o(ovf));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint dv, quot, expq;
  int ne;
  bit expo;

  initial begin
    d = '0; n = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      dv = longint'(signed'($urandom)) >>> $urandom_range(31);
      d = fir_out_t'(dv);
      n = 6'($urandom_range(63));
      ne = (n > 18) ? 18 : (n < -13) ? -13 : int'(n);
      // floor(dv * 2^-ne)
      quot = (ne >= 0) ? (dv >>> ne) : (dv <<< (-ne));
      expo = (quot > 8191) || (quot < -8192);
      expq = quot & 64'h3fff;
      if (expq >= 8192) expq -= 16384;
      @(posedge clk);
      #1;
      checks += 2;
      if (longint'(q) != expq) begin
        failures++;
        if (failures < 10) $display("FAIL data d=%0d n=%0d q=%0d exp=%0d", dv, n, q, expq);
      end
      if (ovf != expo) begin
        failures++;
        if (failures < 10) $display("FAIL ovf d=%0d n=%0d", dv, n);
      end
      if (ovf) ovf_seen++;
      if (ne < 0) add_seen++;
      if (ne < 0 && !ovf) add_ok_seen++;
    end
    checks += 3;
    if (ovf_seen == 0) failures++;
    if (add_seen == 0) failures++;
    if (add_ok_seen == 0) failures++;
    $display("overflows seen: %0d, LSBs added: %0d (%0d without overflow)", ovf_seen, add_seen, add_ok_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
