// fft_sdf: streaming N-point complex FFT, one sample per clock.
//
// A chain of log2(N) radix-2 delay-feedback stages (fft_sdf_stage) with delay
// lines of N/2, N/4, ..., 1 samples. The input is in natural order and the
// output X[k] = sum_n x[n] exp(-j*2*pi*k*n/N) comes out in bit-reversed
// order of k, scaled by 2^-(number of set bits of SCALE): bit s of SCALE
// halves the results of stage s. The inverse transform is obtained by the
// caller by conjugating input and output.
//
// Interface: in_sof marks sample 0 of a frame; frames follow each other
// without gaps. out_sof marks the first output (bin 0) of a frame. The
// latency from in_sof to out_sof is N-1 valid samples plus log2(N) clocks.
module fft_sdf
  import kid_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned SCALE = 0
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  logic  in_sof,
  input  cbin_t in_data,
  output logic  out_valid,
  output logic  out_sof,
  output cbin_t out_data
);
  localparam int unsigned LOGN = $clog2(N);

  logic  v [LOGN+1];
  logic  s [LOGN+1];
  cbin_t d [LOGN+1];

  assign v[0] = in_valid;
  assign s[0] = in_sof;
  assign d[0] = in_data;

  for (genvar g = 0; g < LOGN; g++) begin : g_stage
    fft_sdf_stage #(
      .N         (N),
      .D         (N >> (g + 1)),
      .TW_STRIDE (1 << g),
      .SHIFT     (((SCALE >> g) & 1) == 1)
    ) u_stage (
      .clk, .rst,
      .in_valid (v[g]),   .in_sof (s[g]),   .in_data (d[g]),
      .out_valid(v[g+1]), .out_sof(s[g+1]), .out_data(d[g+1])
    );
  end

  assign out_valid = v[LOGN];
  assign out_sof   = s[LOGN];
  assign out_data  = d[LOGN];
endmodule
