// frac_resampler: fractional-rate resampling of the TOD to the science rate.
//
// The 10 kHz TOD is resampled by a programmable, not necessarily integer,
// ratio: one output instant every STEP input samples, STEP in 16.16 fixed
// point (STEP = 10006/200 for 200 Hz out of 10.006 kHz). A 32-bit register
// rem holds the time from the previous input sample to the next output
// instant. When a new input sample (a new frame, marked by tone 0) arrives:
// if rem <= 1.0 an output instant lies between the previous sample p and
// this one c, and every tone of the frame is emitted as
//     y = p + ((c - p) * mu) >>> 16,  mu = rem (0 < mu <= 1.0),
// after which rem grows by STEP; in every case rem then drops by 1.0.
// That is linear interpolation driven by a phase accumulator; anti-alias
// filtering before it is left to the accumulator's boxcar and is not
// otherwise done here. The glitch flag of an output is that of c, ORed with
// that of p unless mu is exactly 1.0 (then y is c alone).
//
// Configuration: REG_RS_STEP (16.16, at least 1.0; 1.0 after reset, which
// passes every sample through unchanged).
// Timing: out registered, one clock after the input record.
// From the paper: fractional rate resampling filter to about 100-700 Hz.
// The interpolation method is this design's choice.
module frac_resampler
  import kid_pkg::*;
#(
  parameter int unsigned NTONES = 1024
) (
  input  logic    clk,
  input  logic    rst,
  input  cfg_wr_t cfg,
  input  tod_t    in,
  output tod_t    out
);
  localparam int unsigned TW  = $clog2(NTONES);
  localparam logic [31:0] ONE = 32'h0001_0000;

  logic [31:0] step, rem;
  logic        emit;       // this frame produces output
  logic [16:0] mu;

  logic signed [TOD_W-1:0] p_i [NTONES];
  logic signed [TOD_W-1:0] p_q [NTONES];
  logic                    p_g [NTONES];

  // decision for the frame that starts with this record
  logic        frame_start, emit_now;
  logic [16:0] mu_now;
  always_comb begin
    frame_start = in.valid && in.tone == '0;
    emit_now    = frame_start ? (rem <= ONE) : emit;
    mu_now      = frame_start ? rem[16:0] : mu;
  end

  logic [TW-1:0]           t;
  logic signed [TOD_W:0]   di, dq;
  logic signed [TOD_W+18:0] mi, mq;
  always_comb begin
    t  = TW'(in.tone);
    di = (TOD_W+1)'(in.i) - (TOD_W+1)'(p_i[t]);
    dq = (TOD_W+1)'(in.q) - (TOD_W+1)'(p_q[t]);
    mi = di * $signed({1'b0, mu_now});
    mq = dq * $signed({1'b0, mu_now});
  end

  always_ff @(posedge clk) begin
    if (in.valid) begin
      p_i[t] <= in.i;
      p_q[t] <= in.q;
      p_g[t] <= in.glitch;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      step <= ONE;
      rem  <= ONE;
      emit <= 1'b0;
      mu   <= '0;
      out  <= '0;
    end else begin
      if (cfg.we && cfg.addr == REG_RS_STEP) step <= cfg.data;
      if (frame_start) begin
        emit <= emit_now;
        mu   <= mu_now;
        rem  <= (emit_now ? rem + step : rem) - ONE;
      end
      out.valid  <= in.valid && emit_now;
      out.tone   <= in.tone;
      out.glitch <= in.glitch || (mu_now != 17'h10000 && p_g[t]);
      out.i      <= TOD_W'(p_i[t] + TOD_W'(mi >>> 16));
      out.q      <= TOD_W'(p_q[t] + TOD_W'(mq >>> 16));
    end
  end
endmodule
