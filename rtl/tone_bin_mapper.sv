// tone_bin_mapper: builds the spectrum that feeds the synthesis filterbank.
//
// For every tone t arriving from the NCO bank it adds amp[t] * (cos + j sin)
// (scaled by 2^-15) into bin bin[t] of a frame buffer, so any number of
// tones may share one bin. Two buffers alternate: while one is being built
// from the current NCO sweep, the other is streamed out in natural bin order
// k = 0..N-1, one bin per clock, and cleared behind the read so that it is
// empty for its next build. The buffers swap when tone 0 of a sweep
// arrives; that instant is also out_sof, so the NCO sweep period (N clocks)
// sets the frame. Nothing is streamed before the first swap.
//
// Configuration: REG_AMP+t amplitude (signed 16 bits), REG_BIN+t bin index.
// Timing: out_sof/out_data registered, one clock after tone 0 arrives.
// The paper gives the function (NCO outputs placed in filterbank bins, up to
// 32 tones per bin); the double-buffered accumulation is this design's.
module tone_bin_mapper
  import kid_pkg::*;
#(
  parameter int unsigned N      = 1024,
  parameter int unsigned NTONES = 1024
) (
  input  logic    clk,
  input  logic    rst,
  input  cfg_wr_t cfg,
  input  nco_t    nco,
  output logic    out_valid,
  output logic    out_sof,
  output cbin_t   out_data
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned TW   = $clog2(NTONES);

  logic signed [15:0] amp [NTONES];
  logic [LOGN-1:0]    bin [NTONES];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.addr >= REG_AMP && 32'(cfg.addr - REG_AMP) < NTONES)
      amp[TW'(cfg.addr - REG_AMP)] <= cfg.data[15:0];
    if (cfg.we && cfg.addr >= REG_BIN && 32'(cfg.addr - REG_BIN) < NTONES)
      bin[TW'(cfg.addr - REG_BIN)] <= cfg.data[LOGN-1:0];
  end

  logic            bsel;      // buffer being built
  logic            running;
  logic [LOGN-1:0] rcnt, rk;
  logic            swap;

  assign swap = nco.valid && nco.tone == '0;
  assign rk   = swap ? '0 : rcnt;

  // contribution of the current tone
  logic [TW-1:0]      t;
  logic [LOGN-1:0]    wb;
  cbin_t              contrib;
  logic signed [31:0] pr, pi;
  always_comb begin
    t  = TW'(nco.tone);
    wb = bin[t];
    pr = amp[t] * nco.c;
    pi = amp[t] * nco.s;
    contrib.re = BIN_W'(pr >>> 15);
    contrib.im = BIN_W'(pi >>> 15);
  end

  // two single-write-port buffers; the build side uses the buffer that will
  // be selected after a swap in this cycle
  logic build_sel;
  assign build_sel = swap ? ~bsel : bsel;

  for (genvar b = 0; b < 2; b++) begin : g_buf
    cbin_t mem [N];
    cbin_t rd;
    assign rd = mem[rk];
    always_ff @(posedge clk) begin
      if (build_sel == 1'(b)) begin
        if (nco.valid) begin
          mem[wb].re <= mem[wb].re + contrib.re;
          mem[wb].im <= mem[wb].im + contrib.im;
        end
      end else if (running || swap) begin
        mem[rk] <= '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      bsel      <= 1'b0;
      running   <= 1'b0;
      rcnt      <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
    end else begin
      if (swap) begin
        bsel    <= ~bsel;
        running <= 1'b1;
      end
      if (running || swap) rcnt <= rk + 1'b1;
      out_valid <= running || swap;
      out_sof   <= swap && running;
      out_data  <= build_sel ? g_buf[0].rd : g_buf[1].rd;
    end
  end
endmodule
