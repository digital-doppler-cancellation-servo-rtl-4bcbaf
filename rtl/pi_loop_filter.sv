// pi_loop_filter: proportional-integral loop filter of the phase-locked loop.
//
// From the 14-bit phase error e it forms the frequency correction
//   u = sat( kp*e + (I >>> I_SHIFT) ),   I <- sat_I( I + ki*e ),
// where the integrator I carries I_SHIFT extra fractional bits so that small
// integral gains remain usable at 125 MS/s. The integrator is clamped to the
// range that maps onto the output word (anti-windup), and the sum is
// saturated to OUT_W bits. `sat_o` reports that either clamp acted.
// When `en` is low the loop is open: the integrator is cleared and u = 0, so
// the channel-1 DDS sits at its centre frequency; raising `en` engages the
// lock with the integrator starting from zero.
//
// Interface: e_i, kp_i, ki_i, en sampled every clock. u_o registered.
// Timing: e at cycle t reaches u_o after two edges (product register, then
// sum register); the integrator includes e from the same cycle.
// Published: a proportional-integral loop filter between the shifter and
// the bias adder. Own choices: the gain widths, I_SHIFT, the clamps and the
// enable behaviour.
module pi_loop_filter
  import servo_pkg::*;
#(
  parameter int unsigned E_W     = ERR_W,
  parameter int unsigned G_W     = GAIN_W,
  parameter int unsigned OUT_W   = LF_OUT_W,
  parameter int unsigned I_SHIFT = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic signed [E_W-1:0]   e_i,
  input  logic signed [G_W-1:0]   kp_i,
  input  logic signed [G_W-1:0]   ki_i,
  output logic signed [OUT_W-1:0] u_o,
  output logic                    sat_o
);

  localparam int unsigned P_W   = E_W + G_W;          // product width
  localparam int unsigned I_W   = OUT_W + I_SHIFT;    // integrator width
  localparam int unsigned S_W   = I_W + 2;            // adder headroom
  localparam logic signed [S_W-1:0] I_MAX = S_W'((65'sd1 <<< (I_W - 1)) - 1);
  localparam logic signed [S_W-1:0] I_MIN = -S_W'(65'sd1 <<< (I_W - 1));
  localparam logic signed [S_W-1:0] U_MAX = S_W'((65'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [S_W-1:0] U_MIN = -S_W'(65'sd1 <<< (OUT_W - 1));

  logic signed [P_W-1:0] p_prod, i_prod;
  logic signed [P_W-1:0] p_q, i_q;
  logic                  en_q;
  logic signed [I_W-1:0] integ;
  logic signed [S_W-1:0] integ_next, sum;
  logic                  i_clip, u_clip;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_q  <= '0;
      i_q  <= '0;
      en_q <= 1'b0;
    end else begin
      p_q  <= p_prod;
      i_q  <= i_prod;
      en_q <= en;
    end
  end

  always_comb begin
    p_prod = P_W'(e_i * kp_i);
    i_prod = P_W'(e_i * ki_i);
    integ_next = S_W'(integ) + S_W'(i_q);
    i_clip = (integ_next > I_MAX) || (integ_next < I_MIN);
    if (integ_next > I_MAX)      integ_next = I_MAX;
    else if (integ_next < I_MIN) integ_next = I_MIN;
    sum    = S_W'(p_q) + (S_W'(integ_next) >>> I_SHIFT);
    u_clip = (sum > U_MAX) || (sum < U_MIN);
    if (sum > U_MAX)      sum = U_MAX;
    else if (sum < U_MIN) sum = U_MIN;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ <= '0;
      u_o   <= '0;
      sat_o <= 1'b0;
    end else if (!en_q) begin
      integ <= '0;
      u_o   <= '0;
      sat_o <= 1'b0;
    end else begin
      integ <= I_W'(integ_next);
      u_o   <= OUT_W'(sum);
      sat_o <= i_clip || u_clip;
    end
  end

endmodule
