// dyn_shift: dynamic shifter between the 32-bit FIR output and the 14-bit
// loop-filter input.
//
// It selects 14 consecutive bits of the input word. For n >= 0 the n lowest
// bits are discarded and so are the 18-n highest ones, so out = in[n+13 : n].
// A large n keeps a strong signal (open-loop monitoring) inside the 14-bit
// range; a small n gives full resolution to the nearly vanishing error once
// the loop is locked. For n < 0 the shifter adds -n zero bits below the
// input's LSB instead, out = {in[13+n : 0], -n zeros}, a gain of 2^-n for a
// very weak signal. n is a signed run-time value; values above 18 act as 18
// and values below -13 act as -13 (beyond that only zeros would be left).
// The selection wraps, exactly as a bit slice does: when the bits dropped at
// the top are not all copies of the new sign bit, the selected word has lost
// its top and `ovf_o` is raised for that sample so software can pick a
// larger n.
//
// Interface: d_i and n_i sampled every clock; q_o and ovf_o registered (one
// clock of latency).
// The bit selection, the range n = 0..18 and the option of adding LSBs are
// the published ones; the signed encoding of n, the limit of 13 added bits,
// the overflow flag and the clamping of n are this design's choices.
module dyn_shift
  import servo_pkg::*;
#(
  parameter int unsigned D_W = FIR_OUT_W,  // input width
  parameter int unsigned Q_W = ERR_W,      // output width
  parameter int unsigned N_W = SHIFT_W     // width of the signed n
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [D_W-1:0] d_i,
  input  logic signed [N_W-1:0] n_i,
  output logic signed [Q_W-1:0] q_o,
  output logic                  ovf_o
);

  localparam int N_MAX = int'(D_W - Q_W);   // most LSBs removed
  localparam int N_MIN = -int'(Q_W - 1);    // most LSBs added
  localparam int W_W   = D_W + Q_W - 1;     // room for the largest left shift

  int                    n_eff;
  logic signed [W_W-1:0] wide;
  logic signed [W_W-1:0] shifted;
  logic signed [W_W-1:0] back;

  always_comb begin
    n_eff = int'(n_i);
    if (n_eff > N_MAX) n_eff = N_MAX;
    if (n_eff < N_MIN) n_eff = N_MIN;
    wide = W_W'(d_i);
    if (n_eff >= 0) shifted = wide >>> n_eff;
    else            shifted = wide <<< (-n_eff);
    // Sign-extend the selected Q_W bits and compare with the exact value:
    // any difference means bits dropped at the top carried information.
    back = W_W'(signed'(shifted[Q_W-1:0]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_o   <= '0;
      ovf_o <= 1'b0;
    end else begin
      q_o   <= shifted[Q_W-1:0];
      ovf_o <= (back != shifted);
    end
  end

endmodule
