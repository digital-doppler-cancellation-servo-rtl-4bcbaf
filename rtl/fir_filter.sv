// fir_filter: 25-tap low-pass FIR, one sample per clock, with taps that the
// processor can rewrite while the filter runs.
//
// Structure: transposed direct form. Every input sample is multiplied by all
// taps at once; product k is added to partial sum k+1 and stored in partial
// sum k, so partial sum 0 holds y[n] = sum_k c[k] x[n-k] one clock after
// x[n] arrived. The partial sums are kept at full precision
// (X_W + C_W + ceil(log2 NTAPS) bits); the output register saturates the sum
// to the 32-bit output word. Tap k multiplies the sample that is k clocks old.
//
// Interface: x_i sampled every clock; coef_we/coef_addr/coef_data write tap
// coef_addr (0..NTAPS-1) on the next edge, out-of-range addresses are
// ignored. Reset loads the default taps from servo_pkg (4 MHz cutoff) and
// clears the delay line. y_o is registered.
// Timing: an impulse at x_i in cycle t gives c[0] on y_o after two clock edges
// (t+2), c[k] at t+2+k; with symmetric taps the group delay is 12 samples, so
// the total delay is 14 clocks = 112 ns at 125 MHz, within the 136 ns quoted
// for the published 25-tap filter.
// Published: 25 taps, 16-bit taps, 32-bit output, 4 MHz cutoff with more
// than 40 dB rejection above 14 MHz. Own choices: transposed form, the tap
// values, saturation at the output and the tap write port.
module fir_filter
  import servo_pkg::*;
#(
  parameter int unsigned N   = NTAPS,
  parameter int unsigned X_W = MIX_W,
  parameter int unsigned C_W = COEF_W,
  parameter int unsigned Y_W = FIR_OUT_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [X_W-1:0]    x_i,
  input  logic                     coef_we,
  input  logic [$clog2(N)-1:0]     coef_addr,
  input  logic signed [C_W-1:0]    coef_data,
  output logic signed [Y_W-1:0]    y_o,
  output logic                     sat_o      // y_o was clipped this sample
);

  localparam int unsigned ACC_W = X_W + C_W + $clog2(N);
  localparam logic signed [ACC_W-1:0] Y_MAX = ACC_W'((64'sd1 <<< (Y_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] Y_MIN = -ACC_W'(64'sd1 <<< (Y_W - 1));

  logic signed [C_W-1:0]   coef [N];
  logic signed [ACC_W-1:0] psum [N];
  logic signed [ACC_W-1:0] prod [N];

  // Taps. Default taps come from the package when the filter has NTAPS taps;
  // other sizes reset to a pass-through (tap 0 = 2^(C_W-1)-1).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) begin
        if (N == NTAPS) coef[k] <= C_W'(FIR_DEFAULT[k]);
        else            coef[k] <= (k == 0) ? C_W'((1 << (C_W - 1)) - 1) : '0;
      end
    end else if (coef_we && (32'(coef_addr) < N)) begin
      coef[coef_addr] <= coef_data;
    end
  end

  always_comb begin
    for (int k = 0; k < N; k++) prod[k] = ACC_W'(x_i * coef[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) psum[k] <= '0;
    end else begin
      for (int k = 0; k < N - 1; k++) psum[k] <= psum[k+1] + prod[k];
      psum[N-1] <= prod[N-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_o   <= '0;
      sat_o <= 1'b0;
    end else if (psum[0] > Y_MAX) begin
      y_o   <= Y_W'(Y_MAX);
      sat_o <= 1'b1;
    end else if (psum[0] < Y_MIN) begin
      y_o   <= Y_W'(Y_MIN);
      sat_o <= 1'b1;
    end else begin
      y_o   <= Y_W'(psum[0]);
      sat_o <= 1'b0;
    end
  end

endmodule
