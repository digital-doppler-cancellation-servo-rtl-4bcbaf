// servo_regs: run-time configuration of the servo, written by the embedded
// processor.
//
// The processor sets the demodulation frequency, the channel-1 centre
// frequency, the channel-2 frequency, the shifter's n, the PI gains, the
// lock enable and the 25 FIR taps while the servo runs. The register map is
// in servo_pkg (reg_addr_e). 40-bit frequency words are written as two
// 32-bit halves: the low half goes to a holding register and the write of the
// high half updates all 40 bits in one clock, so the NCO never sees a
// half-written word. A write to a tap register is forwarded to the FIR as a
// one-clock tap write; a copy is kept for read-back. The status register
// holds sticky flags (bit 0 shifter overflow, bit 1 loop-filter clamp,
// bit 2 FIR output clip); any write to it clears them.
//
// Bus: a simple synchronous port. wr_en with wr_addr/wr_data writes on the
// rising edge; rd_addr is sampled every clock and rd_data is valid one clock
// later. Unmapped addresses read 0 and ignore writes.
// Reset values: loop open, demodulation at 20 MHz, channel 1 at 55 MHz,
// channel 2 at 20 MHz, n = 12, kp = ki = 0, default taps. n, kp and ki are
// signed and read back sign-extended.
// The set of run-time parameters follows the published servo (taps, DDS
// frequencies, n set on the fly); the bus, the map and the reset values are
// this design's choices, since the processor bridge is not described.
module servo_regs
  import servo_pkg::*;
#(
  parameter int unsigned N = NTAPS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // processor port
  input  logic                   wr_en,
  input  logic [7:0]             wr_addr,
  input  logic [31:0]            wr_data,
  input  logic [7:0]             rd_addr,
  output logic [31:0]            rd_data,
  // status events from the datapath (one-clock pulses or levels)
  input  logic                   ev_shift_ovf,
  input  logic                   ev_lf_sat,
  input  logic                   ev_fir_sat,
  // configuration to the datapath
  output servo_cfg_t             cfg,
  output logic                   coef_we,
  output logic [$clog2(N)-1:0]   coef_addr,
  output coef_t                  coef_data
);

  logic [31:0] lo_hold;
  coef_t       coef_shadow [N];
  logic [2:0]  status;
  logic        is_coef_wr;
  logic [7:0]  coef_off;

  always_comb begin
    coef_off   = wr_addr - REG_COEF_BASE;
    is_coef_wr = wr_en && (wr_addr >= REG_COEF_BASE) && (32'(coef_off) < N);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.loop_en   <= 1'b0;
      cfg.demod_ftw <= FTW_20MHZ;
      cfg.bias_ftw  <= FTW_55MHZ;
      cfg.ch2_ftw   <= FTW_20MHZ;
      cfg.shift_n   <= SHIFT_W'(12);
      cfg.kp        <= '0;
      cfg.ki        <= '0;
      lo_hold       <= '0;
    end else if (wr_en) begin
      unique case (wr_addr)
        REG_CTRL:     cfg.loop_en <= wr_data[0];
        REG_DEMOD_LO, REG_BIAS_LO, REG_CH2_LO: lo_hold <= wr_data;
        REG_DEMOD_HI: cfg.demod_ftw <= {wr_data[PHASE_W-33:0], lo_hold};
        REG_BIAS_HI:  cfg.bias_ftw  <= {wr_data[PHASE_W-33:0], lo_hold};
        REG_CH2_HI:   cfg.ch2_ftw   <= {wr_data[PHASE_W-33:0], lo_hold};
        REG_SHIFT:    cfg.shift_n   <= wr_data[SHIFT_W-1:0];
        REG_KP:       cfg.kp        <= wr_data[GAIN_W-1:0];
        REG_KI:       cfg.ki        <= wr_data[GAIN_W-1:0];
        default: ;
      endcase
    end
  end

  // Tap writes: forwarded to the FIR and mirrored for read-back.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coef_we   <= 1'b0;
      coef_addr <= '0;
      coef_data <= '0;
      for (int k = 0; k < N; k++)
        coef_shadow[k] <= (N == NTAPS) ? FIR_DEFAULT[k] : ((k == 0) ? 16'sh7fff : '0);
    end else begin
      coef_we <= is_coef_wr;
      if (is_coef_wr) begin
        coef_addr              <= coef_off[$clog2(N)-1:0];
        coef_data              <= wr_data[COEF_W-1:0];
        coef_shadow[coef_off[$clog2(N)-1:0]] <= wr_data[COEF_W-1:0];
      end
    end
  end

  // Sticky status flags; a write to the status register clears them, an
  // event in the same clock wins.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) status <= '0;
    else begin
      if (wr_en && wr_addr == REG_STATUS) status <= '0;
      if (ev_shift_ovf) status[0] <= 1'b1;
      if (ev_lf_sat)    status[1] <= 1'b1;
      if (ev_fir_sat)   status[2] <= 1'b1;
    end
  end

  // Read-back, one clock of latency.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_data <= '0;
    else begin
      rd_data <= '0;
      if (rd_addr >= REG_COEF_BASE && 32'(rd_addr - REG_COEF_BASE) < N)
        rd_data <= 32'(signed'(coef_shadow[5'(rd_addr - REG_COEF_BASE)]));
      else
        unique case (rd_addr)
          REG_CTRL:     rd_data <= {31'b0, cfg.loop_en};
          REG_DEMOD_LO: rd_data <= cfg.demod_ftw[31:0];
          REG_DEMOD_HI: rd_data <= 32'(cfg.demod_ftw[PHASE_W-1:32]);
          REG_BIAS_LO:  rd_data <= cfg.bias_ftw[31:0];
          REG_BIAS_HI:  rd_data <= 32'(cfg.bias_ftw[PHASE_W-1:32]);
          REG_CH2_LO:   rd_data <= cfg.ch2_ftw[31:0];
          REG_CH2_HI:   rd_data <= 32'(cfg.ch2_ftw[PHASE_W-1:32]);
          REG_SHIFT:    rd_data <= 32'(signed'(cfg.shift_n));
          REG_KP:       rd_data <= 32'(cfg.kp);
          REG_KI:       rd_data <= 32'(cfg.ki);
          REG_STATUS:   rd_data <= 32'(status);
          default: ;
        endcase
    end
  end

  // A tap write reaches the FIR only with an in-range tap index.
  a_coef_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    coef_we |-> (32'(coef_addr) < N));

endmodule
