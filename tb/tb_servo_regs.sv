// tb_servo_regs: checks reset values, read-back of every register, the
// two-part 40-bit frequency writes (no change until the high half is
// written), forwarding of tap writes to the FIR port with the right index
// and value, and the sticky status flags with clear-on-write.
module tb_servo_regs;
  import servo_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic wr_en;
  logic [7:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic ev_ovf, ev_lf, ev_fir;
  servo_cfg_t cfg;
  logic coef_we;
  logic [4:0] coef_addr;
  coef_t coef_data;
  int checks = 0, failures = 0;
  int tap_writes = 0;
  int tap_idx [$];
  int tap_val [$];

  always #4 clk = ~clk;

  servo_regs dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
                  .ev_shift_ovf(ev_ovf), .ev_lf_sat(ev_lf), .ev_fir_sat(ev_fir),
                  .cfg, .coef_we, .coef_addr, .coef_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record every tap write seen on the FIR port
  always @(posedge clk) if (rst_n && coef_we) begin
    tap_writes++;
    tap_idx.push_back(int'(coef_addr));
    tap_val.push_back(int'(coef_data));
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
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

  logic [31:0] v;
  int vals [25];

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    ev_ovf = 0; ev_lf = 0; ev_fir = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // reset values
    check(cfg.loop_en == 1'b0, "reset loop_en");
    check(cfg.demod_ftw == 40'd175921860444, "reset demod 20 MHz");
    check(cfg.bias_ftw == 40'd483785116221, "reset bias 55 MHz");
    check(cfg.ch2_ftw == 40'd175921860444, "reset ch2 20 MHz");
    check(cfg.shift_n == 6'sd12, "reset n");
    rd(8'h21, v); check(v == 32'd71, "reset tap 1 read-back");
    // 40-bit write: low half alone changes nothing
    wr(8'h01, 32'hDEAD_BEEF);
    check(cfg.demod_ftw == 40'd175921860444, "low half held");
    wr(8'h02, 32'h0000_00A5);
    check(cfg.demod_ftw == 40'hA5_DEAD_BEEF, "demod committed");
    rd(8'h01, v); check(v == 32'hDEAD_BEEF, "demod lo read");
    rd(8'h02, v); check(v == 32'h0000_00A5, "demod hi read");
    wr(8'h03, 32'h1234_5678); wr(8'h04, 32'h77);
    check(cfg.bias_ftw == 40'h77_1234_5678, "bias committed");
    wr(8'h05, 32'h0BAD_F00D); wr(8'h06, 32'h3C);
    check(cfg.ch2_ftw == 40'h3C_0BAD_F00D, "ch2 committed");
    wr(8'h07, 32'd17); check(cfg.shift_n == 6'sd17, "n");
    wr(8'h07, 32'hFFFF_FFFC); check(cfg.shift_n == -6'sd4, "negative n");
    rd(8'h07, v); check(v == 32'hFFFF_FFFC, "negative n reads back sign-extended");
    wr(8'h07, 32'd17);
    wr(8'h08, 32'hFFFF_FF85); check(cfg.kp == -16'sd123, "kp");
    wr(8'h09, 32'd45); check(cfg.ki == 16'sd45, "ki");
    wr(8'h00, 32'd1); check(cfg.loop_en == 1'b1, "loop enable");
    rd(8'h08, v); check(v == 32'hFFFF_FF85, "kp read (sign-extended)");
    rd(8'h00, v); check(v == 32'd1, "ctrl read");
    // taps
    for (int k = 0; k < 25; k++) begin
      vals[k] = int'($urandom_range(65535)) - 32768;
      wr(8'h20 + 8'(k), 32'(vals[k]));
    end
    wr(8'h39, 32'h1234);  // one past the last tap: ignored
    @(posedge clk);
    check(tap_writes == 25, "25 tap writes forwarded");
    for (int k = 0; k < 25 && k < tap_idx.size(); k++) begin
      check(tap_idx[k] == k, "tap index");
      check(tap_val[k] == vals[k], "tap value");
    end
    for (int k = 0; k < 25; k++) begin
      rd(8'h20 + 8'(k), v);
      check(v == 32'(vals[k]), "tap read-back");
    end
    // status flags
    rd(8'h0A, v); check(v == 0, "status clear");
    @(negedge clk); ev_ovf = 1; @(negedge clk); ev_ovf = 0;
    rd(8'h0A, v); check(v == 32'd1, "overflow sticky");
    @(negedge clk); ev_lf = 1; ev_fir = 1; @(negedge clk); ev_lf = 0; ev_fir = 0;
    rd(8'h0A, v); check(v == 32'd7, "all sticky");
    wr(8'h0A, 32'd0);
    rd(8'h0A, v); check(v == 0, "cleared by write");
    rd(8'h50, v); check(v == 0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
