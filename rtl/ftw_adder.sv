// ftw_adder: adds the loop-filter correction to the constant frequency word
// that sets the centre frequency (55 MHz) of the channel-1 DDS.
//
// The signed correction is sign-extended and scaled by 2^CORR_SHIFT before
// the addition, so one correction LSB moves the DDS by
// 2^CORR_SHIFT * fclk / 2^40 (29 mHz with the defaults); the 32-bit
// correction then spans about +-244 kHz around the centre. The sum wraps
// modulo 2^40 like the phase accumulator it feeds.
//
// Interface: bias_i and corr_i sampled every clock; ftw_o registered (one
// clock of latency).
// Published: a bias constant added to the loop-filter output ahead of the
// second NCO. Own choice: the scaling shift.
module ftw_adder
  import servo_pkg::*;
#(
  parameter int unsigned F_W        = PHASE_W,
  parameter int unsigned C_W        = LF_OUT_W,
  parameter int unsigned CORR_SHIFT = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [F_W-1:0]        bias_i,
  input  logic signed [C_W-1:0] corr_i,
  output logic [F_W-1:0]        ftw_o
);

  logic [F_W-1:0] corr_scaled;

  assign corr_scaled = F_W'(signed'(F_W'(corr_i)) <<< CORR_SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ftw_o <= '0;
    else        ftw_o <= bias_i + corr_scaled;
  end

endmodule
