// pfb_fir: polyphase FIR front end of a critically sampled filterbank.
//
// Input samples arrive one per clock in frames of N. For the sample at
// position k of frame f the module outputs
//     y_f[k] = sum_{m=0}^{TAPS-1} h[m*N + k] * x_{f-m}[k]  >> COEF_FRAC
// i.e. each of the N polyphase branches is a TAPS-tap FIR running at the
// frame rate. The same structure serves the analysis filterbank (before the
// FFT) and the synthesis filterbank (after the inverse FFT). The window h
// (TAPS*N signed 16-bit words, COEF_FRAC fraction bits) is written by the
// control processor through cfg at base address COEF_BASE + m*N + k; it is
// not given by the paper. Older frames are kept in TAPS-1 frame-long delay
// memories.
//
// The frame memories are not reset: the first TAPS-1 output frames after
// reset hold whatever they contained. TAPS must be at least 2.
//
// Timing: output registered, one clock after the input; out_sof follows
// in_sof. The tap count and window are this design's choices.
module pfb_fir
  import kid_pkg::*;
#(
  parameter int unsigned  N         = 1024,
  parameter int unsigned  TAPS      = 4,
  parameter int unsigned  IN_W      = 12,
  parameter int unsigned  OUT_W     = 24,
  parameter int unsigned  COEF_FRAC = 15,
  parameter logic [15:0]  COEF_BASE = 16'h2000
) (
  input  logic                    clk,
  input  logic                    rst,
  input  cfg_wr_t                 cfg,
  input  logic                    in_valid,
  input  logic                    in_sof,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic                    out_sof,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned LOGC = $clog2(N * TAPS);

  logic signed [15:0]     coef [N*TAPS];
  // one row per branch: row[k][m-1] = x_{f-m}[k], read and rewritten shifted
  logic [TAPS-2:0][IN_W-1:0] hist [N];
  logic [TAPS-2:0][IN_W-1:0] row, nrow;
  logic [LOGN-1:0]        fcnt;
  logic [LOGN-1:0]        k;

  assign k = in_sof ? '0 : fcnt;

  // coefficient writes
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.addr >= COEF_BASE && 32'(cfg.addr - COEF_BASE) < N * TAPS)
      coef[LOGC'(cfg.addr - COEF_BASE)] <= cfg.data[15:0];
  end

  logic signed [IN_W+16+$clog2(TAPS+1):0] acc;
  always_comb begin
    row  = hist[k];
    // drop the oldest frame, insert the newest sample at position 0
    nrow = ((TAPS-1)*IN_W)'({row, in_data});
    acc = $signed(coef[LOGC'(k)]) * in_data;
    for (int m = 1; m < TAPS; m++)
      acc += $signed(coef[LOGC'(m * N) + LOGC'(k)]) * $signed(row[m-1]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      fcnt      <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid && in_sof;
      if (in_valid) begin
        fcnt     <= k + 1'b1;
        out_data <= OUT_W'(acc >>> COEF_FRAC);
        hist[k] <= nrow;
      end
    end
  end
endmodule
