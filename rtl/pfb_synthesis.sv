// pfb_synthesis: synthesis polyphase filterbank, tone spectrum to DAC samples.
//
// Chain: tone_bin_mapper (tone phasors into an N-bin spectrum X_k) ->
// inverse FFT -> bit-reversed to natural order -> real part -> polyphase FIR
// (TAPS taps per branch, window loaded at REG_SYN_COEF) -> arithmetic shift
// by DAC_SHIFT with saturation to the 12-bit DAC word.
// The inverse FFT is the forward FFT applied to conj(X); the real part of
// its output equals that of the inverse transform. Only bins 0..N/2-1 carry
// distinct frequencies for a real DAC at fs: bin k is centred at k*fs/N in
// the first Nyquist zone and its image at fs - k*fs/N in the second.
//
// Interface: nco is the tone stream from nco_bank; dac_valid/dac_data give
// one DAC sample per clock (the DAC is fed at one sample per clock, so the
// clock is the converter sample rate). No scaling inside the FFT: the sum of
// all tone amplitudes must stay below 2^23.
//
// From the paper: N = 1024 synthesis PFB fed by NCO fine tones, 12-bit 5 GS/s
// DAC. This design's choices: FFT architecture, tap count, window by
// register, DAC_SHIFT.
module pfb_synthesis
  import kid_pkg::*;
#(
  parameter int unsigned N         = 1024,
  parameter int unsigned NTONES    = 1024,
  parameter int unsigned TAPS      = 4,
  parameter int unsigned DAC_SHIFT = 9
) (
  input  logic                     clk,
  input  logic                     rst,
  input  cfg_wr_t                  cfg,
  input  nco_t                     nco,
  output logic                     dac_valid,
  output logic signed [CONV_W-1:0] dac_data
);
  logic  m_v, m_s;
  cbin_t m_d, f_in;
  tone_bin_mapper #(.N(N), .NTONES(NTONES)) u_map (
    .clk, .rst, .cfg, .nco,
    .out_valid(m_v), .out_sof(m_s), .out_data(m_d)
  );

  assign f_in.re = m_d.re;
  assign f_in.im = -m_d.im;

  logic  f_v, f_s;
  cbin_t f_d;
  fft_sdf #(.N(N), .SCALE(0)) u_ifft (
    .clk, .rst,
    .in_valid(m_v), .in_sof(m_s), .in_data(f_in),
    .out_valid(f_v), .out_sof(f_s), .out_data(f_d)
  );

  // only the real part is needed after the transform
  logic r_v, r_s;
  logic [BIN_W-1:0] r_d;
  bitrev_reorder #(.N(N), .W(BIN_W)) u_reorder (
    .clk, .rst,
    .in_valid(f_v), .in_sof(f_s), .in_data(f_d.re),
    .out_valid(r_v), .out_sof(r_s), .out_data(r_d)
  );

  logic p_v, p_s;
  logic signed [BIN_W-1:0] p_d;
  pfb_fir #(.N(N), .TAPS(TAPS), .IN_W(BIN_W), .OUT_W(BIN_W),
            .COEF_FRAC(15), .COEF_BASE(REG_SYN_COEF)) u_fir (
    .clk, .rst, .cfg,
    .in_valid(r_v), .in_sof(r_s), .in_data($signed(r_d)),
    .out_valid(p_v), .out_sof(p_s), .out_data(p_d)
  );

  localparam logic signed [BIN_W-1:0] MAXV = BIN_W'((1 << (CONV_W - 1)) - 1);
  localparam logic signed [BIN_W-1:0] MINV = -BIN_W'(1 << (CONV_W - 1));
  logic signed [BIN_W-1:0] scaled;
  assign scaled = p_d >>> DAC_SHIFT;

  always_ff @(posedge clk) begin
    if (rst) begin
      dac_valid <= 1'b0;
      dac_data  <= '0;
    end else begin
      dac_valid <= p_v;
      if (scaled > MAXV)      dac_data <= MAXV[CONV_W-1:0];
      else if (scaled < MINV) dac_data <= MINV[CONV_W-1:0];
      else                    dac_data <= scaled[CONV_W-1:0];
    end
  end
endmodule
