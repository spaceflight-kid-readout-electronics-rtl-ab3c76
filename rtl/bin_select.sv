// bin_select: picks, for every tone, the analysis filterbank bin it sits in.
//
// The bit-reversed bin stream of each analysis frame is written into a
// frame buffer at the natural bin address. Three buffers rotate, so that the
// last complete frame stays untouched for a whole frame while the next one
// is written; this lets the tone sweep run at any fixed phase relative to
// the analysis frames. The tone sweep is the NCO stream: for each tone t on
// req, the module reads bin[t] of the last complete frame (fixed at the start
// of the sweep, when tone 0 arrives) and outputs it tagged with t. Several
// tones may name the same bin.
//
// Configuration: REG_BIN+t bin index of tone t (the same register that
// places the tone in the synthesis filterbank).
// Timing: out is registered, one clock after the request.
// The paper names the block (Fig. 1) and says several tones may share a bin;
// the buffering scheme is this design's.
module bin_select
  import kid_pkg::*;
#(
  parameter int unsigned N      = 1024,
  parameter int unsigned NTONES = 1024
) (
  input  logic      clk,
  input  logic      rst,
  input  cfg_wr_t   cfg,
  input  logic      in_valid,
  input  logic      in_sof,
  input  cbin_t     in_data,
  input  nco_t      req,
  output tone_smp_t out
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned TW   = $clog2(NTONES);

  logic [LOGN-1:0] bin [NTONES];
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.addr >= REG_BIN && 32'(cfg.addr - REG_BIN) < NTONES)
      bin[TW'(cfg.addr - REG_BIN)] <= cfg.data[LOGN-1:0];
  end

  logic [1:0]      wsel;       // buffer being written
  logic [1:0]      done_sel;   // last complete buffer
  logic [1:0]      rsel;       // buffer read by the current sweep
  logic [1:0]      wsel_now, rsel_now;
  logic [LOGN-1:0] fcnt, k;
  logic            seen;

  assign k        = in_sof ? '0 : fcnt;
  assign wsel_now = in_sof ? ((wsel == 2'd2) ? 2'd0 : wsel + 2'd1) : wsel;
  assign rsel_now = (req.valid && req.tone == '0) ? done_sel : rsel;

  logic [LOGN-1:0] raddr;
  assign raddr = bin[TW'(req.tone)];

  cbin_t rd [3];
  for (genvar b = 0; b < 3; b++) begin : g_buf
    cbin_t mem [N];
    always_ff @(posedge clk)
      if (in_valid && wsel_now == 2'(b)) mem[LOGN'(bitrev(16'(k), LOGN))] <= in_data;
    assign rd[b] = mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wsel     <= 2'd0;
      done_sel <= 2'd2;
      rsel     <= 2'd2;
      fcnt     <= '0;
      seen     <= 1'b0;
      out      <= '0;
    end else begin
      if (in_valid) begin
        fcnt <= k + 1'b1;
        if (in_sof) begin
          wsel <= wsel_now;
          seen <= 1'b1;
          if (seen) done_sel <= wsel;
        end
      end
      rsel      <= rsel_now;
      out.valid <= req.valid;
      out.tone  <= req.tone;
      out.d     <= rd[rsel_now];
    end
  end
endmodule
