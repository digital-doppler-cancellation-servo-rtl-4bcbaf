// tb_pi_loop_filter: checks the PI filter against its defining equations,
//   I <- clamp(I + ki*e, +-2^39),  u = clamp(kp*e + floor(I / 2^8), +-2^31),
// with u appearing two clocks after the error sample. Phases: a pure
// integrator ramp (slope check), a pure proportional step, random errors and
// gains, loop disable (output and integrator to zero), and large gains that
// drive both clamps (saturation flag).
module tb_pi_loop_filter;
  import servo_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en;
  err_t e;
  gain_t kp, ki;
  lf_out_t u;
  logic sat;
  int checks = 0, failures = 0;
  int sat_seen = 0;

  always #4 clk = ~clk;

  pi_loop_filter dut (.clk, .rst_n, .en, .e_i(e), .kp_i(kp), .ki_i(ki), .u_o(u), .sat_o(sat));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam longint IMAX = (64'sd1 <<< 39) - 1;
  localparam longint IMIN = -(64'sd1 <<< 39);
  localparam longint UMAX = (64'sd1 <<< 31) - 1;
  localparam longint UMIN = -(64'sd1 <<< 31);

  longint m_int = 0, m_u = 0;
  bit     m_sat = 0;
  longint pend_p = 0, pend_i = 0;
  bit     pend_en = 0;

  // One clock: apply inputs, advance the model, compare.
  task automatic step(int ev, int kpv, int kiv, bit env);
    longint s;
    bit c;
    @(negedge clk);
    e = err_t'(ev); kp = gain_t'(kpv); ki = gain_t'(kiv); en = env;
    @(posedge clk);
    #1;
    // model: second stage uses what the first stage held
    if (!pend_en) begin
      m_int = 0; m_u = 0; m_sat = 0;
    end else begin
      c = 0;
      m_int = m_int + pend_i;
      if (m_int > IMAX) begin m_int = IMAX; c = 1; end
      if (m_int < IMIN) begin m_int = IMIN; c = 1; end
      s = pend_p + (m_int >>> 8);
      if (s > UMAX) begin s = UMAX; c = 1; end
      if (s < UMIN) begin s = UMIN; c = 1; end
      m_u = s; m_sat = c;
    end
    pend_p = longint'(ev) * longint'(kpv);
    pend_i = longint'(ev) * longint'(kiv);
    pend_en = env;
    checks += 2;
    if (longint'(u) != m_u) begin
      failures++;
      if (failures < 10) $display("FAIL u=%0d model=%0d at %0t", u, m_u, $time);
    end
    if (sat != m_sat) begin
      failures++;
      if (failures < 10) $display("FAIL sat=%0d model=%0d at %0t", sat, m_sat, $time);
    end
    if (sat) sat_seen++;
  endtask

  longint u_a, u_b;

  initial begin
    en = 0; e = '0; kp = '0; ki = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    step(0, 0, 0, 0);
    // integrator ramp: e = 100, ki = 64 -> I grows 6400 per clock, u by 25/clock
    for (int i = 0; i < 200; i++) step(100, 0, 64, 1);
    u_a = longint'(u);
    for (int i = 0; i < 256; i++) step(100, 0, 64, 1);
    u_b = longint'(u);
    checks++;
    if (u_b - u_a != 256 * 6400 / 256) begin
      failures++; $display("FAIL ramp slope %0d", u_b - u_a);
    end
    // disable clears everything
    for (int i = 0; i < 5; i++) step(100, 0, 64, 0);
    checks++;
    if (u != 0) failures++;
    // proportional step
    for (int i = 0; i < 5; i++) step(-1234, 77, 0, 1);
    checks++;
    if (longint'(u) != -1234 * 77) failures++;
    // random operation
    for (int i = 0; i < 20000; i++)
      step(int'($urandom_range(16383)) - 8192, int'($urandom_range(2000)) - 1000,
           int'($urandom_range(200)) - 100, (i % 5000) != 4999);
    // saturation: full-scale error with full-scale gains
    for (int i = 0; i < 3000; i++) step(8191, 32767, 32767, 1);
    for (int i = 0; i < 3000; i++) step(-8192, 32767, 32767, 1);
    checks++;
    if (sat_seen == 0) begin failures++; $display("FAIL saturation never reached"); end
    $display("clocks with a clamp active: %0d", sat_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
