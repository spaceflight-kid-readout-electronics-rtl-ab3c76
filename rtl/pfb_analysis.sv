// pfb_analysis: analysis polyphase filterbank, ADC samples to N bins.
//
// Chain: polyphase FIR (TAPS taps per branch, window loaded at
// REG_ANA_COEF) -> N-point FFT. The ADC sample is real, so the FFT input has
// a zero imaginary part and bins k and N-k are conjugates; bins 0..N/2-1
// cover the first Nyquist zone (0..fs/2), and a tone in the second zone
// appears at the mirrored bin. The bins leave in bit-reversed order, one per
// clock, each frame marked by out_sof; bin_select restores the order.
//
// Interface: adc_valid/adc_sof/adc_data, one 12-bit ADC sample per clock,
// adc_sof on sample 0 of each N-sample frame. Bin values are 24-bit complex
// (an on-bin full-scale sine gives about 2047*N/2). Latency from adc_sof to
// out_sof: N + log2(N) clocks.
//
// From the paper: N = 1024 analysis PFB for coarse channelization, 12-bit
// 5 GS/s ADC. This design's choices: FFT architecture, tap count, window by
// register, no scaling in the FFT.
module pfb_analysis
  import kid_pkg::*;
#(
  parameter int unsigned N    = 1024,
  parameter int unsigned TAPS = 4
) (
  input  logic                     clk,
  input  logic                     rst,
  input  cfg_wr_t                  cfg,
  input  logic                     adc_valid,
  input  logic                     adc_sof,
  input  logic signed [CONV_W-1:0] adc_data,
  output logic                     out_valid,
  output logic                     out_sof,
  output cbin_t                    out_data
);
  logic p_v, p_s;
  logic signed [BIN_W-1:0] p_d;
  pfb_fir #(.N(N), .TAPS(TAPS), .IN_W(CONV_W), .OUT_W(BIN_W),
            .COEF_FRAC(15), .COEF_BASE(REG_ANA_COEF)) u_fir (
    .clk, .rst, .cfg,
    .in_valid(adc_valid), .in_sof(adc_sof), .in_data(adc_data),
    .out_valid(p_v), .out_sof(p_s), .out_data(p_d)
  );

  cbin_t f_in;
  assign f_in.re = p_d;
  assign f_in.im = '0;

  fft_sdf #(.N(N), .SCALE(0)) u_fft (
    .clk, .rst,
    .in_valid(p_v), .in_sof(p_s), .in_data(f_in),
    .out_valid, .out_sof, .out_data
  );
endmodule
