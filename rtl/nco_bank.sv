// nco_bank: the tone oscillators of one readout chain.
//
// Every tone (one per detector, plus blind tones) has a 16-bit phase
// accumulator that advances by the tone's signed tuning word once per
// filterbank frame, i.e. at the bin sample rate fs/N. The accumulators of
// all NTONES tones live in one memory and are served in turn by a single
// datapath: a pulse on frame_tick starts a sweep that emits tone 0, 1, ...,
// NTONES-1 on consecutive clocks. For each tone the module outputs cos and
// sin (Q1.15) of (phase + start phase), using the top 10 bits of the sum as
// the address of the shared quarter-wave table, and then stores phase + ftw.
// The frequency offset of a tone from its bin centre is
// ftw * (fs/N) / 2^16.
//
// Configuration (cfg writes): REG_FTW+t tuning word, REG_PHOFS+t start
// phase, REG_NCO_CLR restarts all phases from zero on the next sweep.
//
// Timing: out.valid is high for the NTONES clocks starting two clocks
// after frame_tick. frame_tick must be at least NTONES clocks apart.
//
// From the paper: NCO-based fine channelization inside each filterbank bin,
// 16-bit phase accumulators. This design's choices: one time-shared datapath
// for all tones (the paper speaks of "a set of 32 NCOs"), the sine table
// size and the register map.
module nco_bank
  import kid_pkg::*;
#(
  parameter int unsigned NTONES = 1024
) (
  input  logic    clk,
  input  logic    rst,
  input  cfg_wr_t cfg,
  input  logic    frame_tick,
  output nco_t    out
);
  localparam int unsigned TW = $clog2(NTONES);

  logic signed [PHASE_W-1:0] ftw   [NTONES];
  logic [PHASE_W-1:0]        phofs [NTONES];
  logic [PHASE_W-1:0]        phase [NTONES];

  logic          active;
  logic [TW-1:0] tcnt;
  logic          clr_req, clr_sweep;

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.addr >= REG_FTW && 32'(cfg.addr - REG_FTW) < NTONES)
      ftw[TW'(cfg.addr - REG_FTW)] <= cfg.data[PHASE_W-1:0];
    if (cfg.we && cfg.addr >= REG_PHOFS && 32'(cfg.addr - REG_PHOFS) < NTONES)
      phofs[TW'(cfg.addr - REG_PHOFS)] <= cfg.data[PHASE_W-1:0];
  end

  logic [PHASE_W-1:0] cur, outph;
  logic signed [TRIG_W-1:0] c, s;
  assign cur   = clr_sweep ? '0 : phase[tcnt];
  assign outph = cur + phofs[tcnt];

  sincos_lut u_lut (.phase(outph[PHASE_W-1 -: 10]), .cos_o(c), .sin_o(s));

  always_ff @(posedge clk) begin
    if (active) phase[tcnt] <= cur + ftw[tcnt];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active    <= 1'b0;
      tcnt      <= '0;
      clr_req   <= 1'b1;
      clr_sweep <= 1'b0;
      out       <= '0;
    end else begin
      out.valid <= active;
      out.tone  <= TONE_W'(tcnt);
      out.c     <= c;
      out.s     <= s;
      if (cfg.we && cfg.addr == REG_NCO_CLR) clr_req <= 1'b1;
      if (active) begin
        tcnt <= tcnt + 1'b1;
        if (32'(tcnt) == NTONES - 1) begin
          active    <= 1'b0;
          clr_sweep <= 1'b0;
        end
      end
      if (frame_tick) begin
        active    <= 1'b1;
        tcnt      <= '0;
        clr_sweep <= clr_req;
        clr_req   <= 1'b0;
      end
    end
  end
endmodule
