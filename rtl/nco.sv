// nco: numerically controlled oscillator with sine and cosine outputs.
//
// A 40-bit phase accumulator adds the frequency tuning word `ftw` on every
// clock, so the output frequency is f = ftw * fclk / 2^40 (0.11 mHz steps at
// 125 MHz). The top 12 bits of the accumulator address a 4096-entry table of
// one sine period with a signed 16-bit amplitude; the cosine reads the same
// table a quarter period (1024 entries) ahead, so the pair forms a complex
// local oscillator. The table is filled at elaboration with
// round(32767 * sin(2 pi i / 4096)), so it is symmetric and never -32768.
//
// Interface: `ftw` is sampled every clock; `sin_o`/`cos_o` are registered.
// Timing: a new ftw changes the accumulator on the next edge; the sample of
// accumulator value P appears on sin_o/cos_o one clock after P is held, i.e.
// sin_o at cycle t is the table entry of the accumulator value at cycle t-1.
// Reset clears the accumulator (phase 0).
//
// The 40-bit accumulator, the 4096-value table and the 16-bit amplitude are
// the published figures. Phase truncation to 12 bits without dithering and
// the quarter-period cosine read are this design's choices.
module nco
  import servo_pkg::*;
#(
  parameter int unsigned P_W  = PHASE_W,  // accumulator width
  parameter int unsigned A_W  = LUT_AW,   // table address width
  parameter int unsigned O_W  = AMP_W     // amplitude width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [P_W-1:0]        ftw,
  output logic [P_W-1:0]        phase_o,  // current accumulator value
  output logic signed [O_W-1:0] sin_o,
  output logic signed [O_W-1:0] cos_o
);

  localparam int unsigned DEPTH = 1 << A_W;
  localparam real AMPL = real'((1 << (O_W - 1)) - 1);

  function automatic logic signed [O_W-1:0] sine_entry(int unsigned i);
    real x;
    x = AMPL * $sin(2.0 * 3.14159265358979323846 * real'(i) / real'(DEPTH));
    return O_W'($rtoi(x >= 0.0 ? x + 0.5 : x - 0.5));
  endfunction

  logic signed [O_W-1:0] lut [DEPTH];
  initial begin
    for (int unsigned i = 0; i < DEPTH; i++) lut[i] = sine_entry(i);
  end

  logic [P_W-1:0] acc;
  logic [A_W-1:0] addr_s, addr_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else        acc <= acc + ftw;
  end

  assign addr_s  = acc[P_W-1 -: A_W];
  assign addr_c  = addr_s + A_W'(DEPTH / 4);
  assign phase_o = acc;

  always_ff @(posedge clk) begin
    sin_o <= lut[addr_s];
    cos_o <= lut[addr_c];
  end

endmodule
