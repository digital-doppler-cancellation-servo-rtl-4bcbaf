// iq_mixer: complex demodulator. Multiplies each ADC sample by the cosine and
// the sine of the local NCO, acting as an ideal quadrature mixer with no LO
// leakage and no I/Q imbalance.
//
// Each product is X_W + L_W bits wide; it is reduced to the 14-bit output by
// an arithmetic right shift of L_W-1 bits (the LO is a signed fraction with
// full scale 2^(L_W-1)-1, so the output keeps the ADC scale). Since the LO
// never reaches -2^(L_W-1), the shifted product always fits the output width
// and no saturation is needed.
//
// Interface: adc_i, lo_cos, lo_sin are sampled every clock (125 MS/s, no
// valid strobe). i_o = adc*cos and q_o = adc*sin, registered: one clock of
// latency. The 14-bit output width follows the published design; the
// truncating shift (no rounding) is this design's choice.
module iq_mixer
  import servo_pkg::*;
#(
  parameter int unsigned X_W = ADC_W,   // input sample width
  parameter int unsigned L_W = AMP_W,   // LO amplitude width
  parameter int unsigned Y_W = MIX_W    // output width
) (
  input  logic                  clk,
  input  logic signed [X_W-1:0] adc_i,
  input  logic signed [L_W-1:0] lo_cos,
  input  logic signed [L_W-1:0] lo_sin,
  output logic signed [Y_W-1:0] i_o,
  output logic signed [Y_W-1:0] q_o
);

  logic signed [X_W+L_W-1:0] prod_i, prod_q;

  always_comb begin
    prod_i = adc_i * lo_cos;
    prod_q = adc_i * lo_sin;
  end

  always_ff @(posedge clk) begin
    i_o <= Y_W'(prod_i >>> (L_W - 1));
    q_o <= Y_W'(prod_q >>> (L_W - 1));
  end

endmodule
