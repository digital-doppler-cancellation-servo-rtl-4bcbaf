// dds: direct digital synthesiser for one DAC channel.
//
// An nco produces a 16-bit sine at f = ftw * fclk / 2^40; the sample is
// rounded to the 14-bit DAC word (add half an output LSB, shift right by the
// width difference, saturate the one positive code that rounding can push
// out of range). Channel 1 of the servo uses it at a 55 MHz centre frequency
// moved by the loop; channel 2 runs on its own (20 or 55 MHz) as a reference
// output for judging the digital board.
//
// Interface: ftw sampled every clock; dac_o registered; phase_o is the
// accumulator value (its top bits address the table). The nco's cosine
// output is left unused here. Timing: dac_o lags
// the NCO's sin_o by one clock (two clocks after the accumulator value).
// Reset clears the phase.
// Published: NCO feeding a DAC channel, 14-bit DAC. Own choice: rounding.
module dds
  import servo_pkg::*;
#(
  parameter int unsigned P_W = PHASE_W,
  parameter int unsigned A_W = LUT_AW,
  parameter int unsigned S_W = AMP_W,
  parameter int unsigned D_W = DAC_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [P_W-1:0]        ftw,
  output logic [P_W-1:0]        phase_o,  // accumulator, for monitoring
  output logic signed [D_W-1:0] dac_o
);

  localparam int unsigned DROP = S_W - D_W;
  localparam logic signed [S_W:0] D_MAX = (S_W+1)'((1 << (D_W - 1)) - 1);

  logic signed [S_W-1:0] sine;
  logic signed [S_W:0]   rounded;

  nco #(.P_W(P_W), .A_W(A_W), .O_W(S_W)) u_nco (
    .clk, .rst_n, .ftw,
    .phase_o, .sin_o(sine), .cos_o()
  );

  always_comb begin
    if (DROP == 0) rounded = (S_W+1)'(sine);
    else           rounded = ((S_W+1)'(sine) + (S_W+1)'(1 << (DROP - 1))) >>> DROP;
    if (rounded > D_MAX) rounded = D_MAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dac_o <= '0;
    else        dac_o <= D_W'(rounded);
  end

endmodule
