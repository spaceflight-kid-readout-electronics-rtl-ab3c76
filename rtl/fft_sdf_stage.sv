// fft_sdf_stage: one radix-2 single-path delay-feedback (SDF) FFT stage,
// decimation in frequency.
//
// The stage sees its input as blocks of 2*D samples. During the first D
// samples of a block it stores them in a D-deep delay line and sends out what
// the line held: the differences of the previous block, multiplied by the
// twiddle factor W^(n*TW_STRIDE), W = exp(-j*2*pi/1024). During the second D
// samples it forms sum and difference with the stored sample of the same
// index n: the sum goes out at once, the difference goes into the line.
// Chaining log2(N) stages with D = N/2, N/4, ..., 1 gives an N-point FFT in
// bit-reversed output order. With SHIFT set, sums and differences are halved
// (rounding toward minus infinity) so that the stage cannot grow.
//
// Interface: in_valid/in_sof/in_data, one complex sample per valid cycle;
// in_sof marks sample 0 of an N-sample frame. The output is registered and
// lags the input by D valid samples plus one clock; out_sof marks the
// first sample of each output frame. The filterbank size comes from the
// paper; the FFT architecture is this design's choice.
module fft_sdf_stage
  import kid_pkg::*;
#(
  parameter int unsigned N         = 1024,
  parameter int unsigned D         = 512,
  parameter int unsigned TW_STRIDE = 1,
  parameter bit          SHIFT     = 1'b0
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
  localparam int unsigned DW   = (D > 1) ? $clog2(D) : 1;

  cbin_t             line [D];
  logic [DW-1:0]     ptr;
  logic [LOGN-1:0]   fcnt;      // index of the current input in its frame
  logic              started;   // an out_sof has been produced
  logic [LOGN-1:0]   idx;
  logic              second;    // input belongs to second half of a block
  logic [DW-1:0]     n;

  always_comb begin
    idx    = in_sof ? '0 : fcnt;
    second = ((idx / LOGN'(D)) % 2) == 1;
    n      = DW'(idx % LOGN'(D));
  end

  // twiddle for the element leaving the delay line
  logic signed [15:0] tw_c, tw_s;
  sincos_lut u_tw (
    .phase (10'((32'(n) * TW_STRIDE * (1024 / N)) % 1024)),
    .cos_o (tw_c),
    .sin_o (tw_s)
  );

  cbin_t popped;
  assign popped = line[ptr];

  function automatic logic signed [BIN_W-1:0] half_or_not(input logic signed [BIN_W:0] v);
    return SHIFT ? BIN_W'(v >>> 1) : BIN_W'(v);
  endfunction

  // (a + jb) * (c - js), with c,s in Q1.15, rounded
  function automatic cbin_t twiddle(input cbin_t v, input logic signed [15:0] c,
                                    input logic signed [15:0] s);
    logic signed [BIN_W+16:0] pr, pi;
    cbin_t r;
    pr = BIN_W'(v.re) * c + BIN_W'(v.im) * s;
    pi = BIN_W'(v.im) * c - BIN_W'(v.re) * s;
    r.re = BIN_W'((pr + (1 <<< 14)) >>> 15);
    r.im = BIN_W'((pi + (1 <<< 14)) >>> 15);
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr       <= '0;
      fcnt      <= '0;
      started   <= 1'b0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (in_valid) begin
        fcnt <= idx + 1'b1;
        ptr  <= (32'(ptr) == D - 1) ? '0 : ptr + 1'b1;
        if (second) begin
          cbin_t d;
          out_data.re <= half_or_not((BIN_W+1)'(popped.re) + (BIN_W+1)'(in_data.re));
          out_data.im <= half_or_not((BIN_W+1)'(popped.im) + (BIN_W+1)'(in_data.im));
          d.re = half_or_not((BIN_W+1)'(popped.re) - (BIN_W+1)'(in_data.re));
          d.im = half_or_not((BIN_W+1)'(popped.im) - (BIN_W+1)'(in_data.im));
          line[ptr] <= d;
        end else begin
          out_data  <= twiddle(popped, tw_c, tw_s);
          line[ptr] <= in_data;
        end
        if (32'(idx) == D) begin
          started <= 1'b1;
          out_sof <= 1'b1;
        end
        out_valid <= started || (32'(idx) == D);
      end
    end
  end
endmodule
