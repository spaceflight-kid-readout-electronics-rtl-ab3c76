// glitch_remover: on-board cosmic-ray glitch flagging and removal.
//
// A cosmic-ray hit shows up in a tone's TOD as a fast step that decays with
// the detector time constant (about 1 ms, ten samples at 10 kHz). For each
// tone the module keeps the last MF_LEN samples of I and Q and runs a
// matched filter over them,
//     y = sum_{j=0}^{MF_LEN-1} tpl[j] * x[n-j]  >>> 15,
// with a template tpl loaded by the control processor (it should have zero
// mean so that the steady tone level does not trigger it). When
// |y_I| + |y_Q| exceeds the threshold, the whole window x[n-MF_LEN+1..n]
// and the next HOLD samples are marked as glitched. The output is the
// oldest sample of the window, x[n-MF_LEN+1], so a glitch is caught before
// its first sample leaves; a marked sample is replaced by the tone's last
// unmarked output and carries glitch = 1.
//
// Configuration: REG_GL_TPL+j template tap j (signed Q1.15), REG_GL_THR
// threshold (unsigned), REG_GL_HOLD extra blanked samples.
// Timing: out is registered, one clock after in, delayed by MF_LEN-1
// samples of the same tone. The first MF_LEN-1 outputs per tone after reset
// come from unwritten history.
// From the paper: glitches flagged and removed on the 10 kHz data before
// resampling, by matched filter and threshold. Template length, the
// blanking window and the replacement value are this design's choices.
module glitch_remover
  import kid_pkg::*;
#(
  parameter int unsigned NTONES = 1024,
  parameter int unsigned MF_LEN = 8
) (
  input  logic    clk,
  input  logic    rst,
  input  cfg_wr_t cfg,
  input  tod_t    in,
  output tod_t    out
);
  localparam int unsigned TW = $clog2(NTONES);
  localparam int unsigned MW = TOD_W + 16 + $clog2(MF_LEN) + 1;
  localparam int unsigned CW = 16;

  logic signed [15:0]      tpl [MF_LEN];
  logic [TOD_W-1:0]        thr;
  logic [CW-1:0]           hold;

  always_ff @(posedge clk) begin
    if (rst) begin
      thr  <= '1;
      hold <= '0;
      for (int j = 0; j < MF_LEN; j++) tpl[j] <= '0;
    end else if (cfg.we) begin
      if (cfg.addr == REG_GL_THR)  thr  <= cfg.data[TOD_W-1:0];
      if (cfg.addr == REG_GL_HOLD) hold <= cfg.data[CW-1:0];
      if (cfg.addr >= REG_GL_TPL && 32'(cfg.addr - REG_GL_TPL) < MF_LEN)
        tpl[$clog2(MF_LEN)'(cfg.addr - REG_GL_TPL)] <= cfg.data[15:0];
    end
  end

  // per-tone state: history (hi[t][0] = x[n-1]), blanking count, last good
  // one memory row per tone holds its history, read and rewritten shifted
  logic [MF_LEN-2:0][TOD_W-1:0] hi_i [NTONES];
  logic [MF_LEN-2:0][TOD_W-1:0] hi_q [NTONES];
  logic [MF_LEN-2:0][TOD_W-1:0] ri, rq, ni, nq;
  logic [CW-1:0]           bcnt [NTONES];
  logic signed [TOD_W-1:0] good_i [NTONES];
  logic signed [TOD_W-1:0] good_q [NTONES];

  logic [TW-1:0]           t;
  logic signed [MW-1:0]    yi, yq;
  logic [MW-1:0]           metric;
  logic                    det, blank;
  logic signed [TOD_W-1:0] old_i, old_q;

  always_comb begin
    t  = TW'(in.tone);
    ri = hi_i[t];
    rq = hi_q[t];
    ni = ((MF_LEN-1)*TOD_W)'({ri, in.i});
    nq = ((MF_LEN-1)*TOD_W)'({rq, in.q});
    yi = MW'(tpl[0] * in.i);
    yq = MW'(tpl[0] * in.q);
    for (int j = 1; j < MF_LEN; j++) begin
      yi += MW'(tpl[j] * $signed(ri[j-1]));
      yq += MW'(tpl[j] * $signed(rq[j-1]));
    end
    yi     = yi >>> 15;
    yq     = yq >>> 15;
    metric = MW'(yi < 0 ? -yi : yi) + MW'(yq < 0 ? -yq : yq);
    det    = metric > MW'(thr);
    blank  = det || bcnt[t] != '0;
    old_i  = ri[MF_LEN-2];
    old_q  = rq[MF_LEN-2];
  end

  always_ff @(posedge clk) begin
    if (in.valid) begin
      hi_i[t] <= ni;
      hi_q[t] <= nq;
      if (!blank) begin
        good_i[t] <= old_i;
        good_q[t] <= old_q;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NTONES; i++) bcnt[i] <= '0;
    end else if (in.valid) begin
      if (det)                bcnt[t] <= CW'(MF_LEN - 1) + hold;
      else if (bcnt[t] != '0) bcnt[t] <= bcnt[t] - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out <= '0;
    end else begin
      out.valid  <= in.valid;
      out.tone   <= in.tone;
      out.glitch <= blank;
      out.i      <= blank ? good_i[t] : old_i;
      out.q      <= blank ? good_q[t] : old_q;
    end
  end
endmodule
