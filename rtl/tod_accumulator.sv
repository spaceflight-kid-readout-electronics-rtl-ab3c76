// tod_accumulator: sums each tone's DDC output over ACC_LEN frames.
//
// Every filterbank frame brings one I/Q sample per tone at fs/N
// (4.88 MHz at 5 GS/s and N = 1024). The module keeps one running sum per
// tone and, on the last frame of each group of ACC_LEN frames, emits
// (sum >>> ACC_SHIFT) for that tone as a TOD record and restarts the sum.
// With ACC_LEN = 488 the output rate is 5e9/1024/488 = 10.006 kHz, the
// full-rate TOD on which glitches are removed.
//
// Interface: in is the DDC stream, tones in sweep order, a new frame
// starting at tone 0. out is registered: the record of tone t leaves one
// clock after tone t of the last frame of a group. The first group after
// reset starts with the first tone-0 sample.
// From the paper: I/Q accumulated at the DDC outputs, maximum output rate
// 10 kHz. ACC_LEN, the shift and the widths are this design's choices.
module tod_accumulator
  import kid_pkg::*;
#(
  parameter int unsigned NTONES    = 1024,
  parameter int unsigned ACC_LEN   = 488,
  parameter int unsigned ACC_SHIFT = 1
) (
  input  logic      clk,
  input  logic      rst,
  input  tone_smp_t in,
  output tod_t      out
);
  localparam int unsigned TW  = $clog2(NTONES);
  localparam int unsigned AW  = BIN_W + $clog2(ACC_LEN + 1) + 1;
  localparam int unsigned FW  = $clog2(ACC_LEN + 1);

  logic signed [AW-1:0] acc_i [NTONES];
  logic signed [AW-1:0] acc_q [NTONES];
  logic [FW-1:0]        frame, frame_now;
  logic                 started;
  logic                 first, last;
  logic signed [AW-1:0] si, sq;

  always_comb begin
    // the frame counter advances when tone 0 arrives
    if (in.valid && in.tone == '0 && started)
      frame_now = (32'(frame) == ACC_LEN - 1) ? '0 : frame + 1'b1;
    else
      frame_now = frame;
    first = (frame_now == '0);
    last  = (32'(frame_now) == ACC_LEN - 1);
    si = (first ? '0 : acc_i[TW'(in.tone)]) + AW'(in.d.re);
    sq = (first ? '0 : acc_q[TW'(in.tone)]) + AW'(in.d.im);
  end

  always_ff @(posedge clk) begin
    if (in.valid && (started || in.tone == '0)) begin
      acc_i[TW'(in.tone)] <= si;
      acc_q[TW'(in.tone)] <= sq;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      frame   <= '0;
      started <= 1'b0;
      out     <= '0;
    end else begin
      if (in.valid && in.tone == '0) started <= 1'b1;
      frame      <= frame_now;
      out.valid  <= in.valid && (started || in.tone == '0) && last;
      out.tone   <= in.tone;
      out.glitch <= 1'b0;
      out.i      <= TOD_W'(si >>> ACC_SHIFT);
      out.q      <= TOD_W'(sq >>> ACC_SHIFT);
    end
  end
endmodule
