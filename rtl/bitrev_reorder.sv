// bitrev_reorder: puts a bit-reversed frame stream back into natural order.
//
// Two frame buffers of N words alternate: while one is written with the
// incoming frame at the bit-reversed address of each sample's position, the
// other is read out in natural order. Output frames therefore lag input
// frames by exactly one frame (N valid samples) plus one clock. The input
// must be a gapless stream of whole frames marked by in_sof; reading starts
// with the first complete frame. Used after the inverse FFT of the
// synthesis filterbank.
module bitrev_reorder
  import kid_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic         in_sof,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic         out_sof,
  output logic [W-1:0] out_data
);
  localparam int unsigned LOGN = $clog2(N);

  logic [W-1:0]    buffer [2][N];
  logic [LOGN-1:0] fcnt, k;
  logic            wsel;      // buffer being written
  logic            have_frame; // the read buffer holds a whole frame
  logic            seen;       // an in_sof has arrived

  assign k = in_sof ? '0 : fcnt;

  always_ff @(posedge clk) begin
    if (in_valid)
      buffer[in_sof ? ~wsel : wsel][LOGN'(bitrev(16'(k), LOGN))] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      fcnt       <= '0;
      wsel       <= 1'b0;
      have_frame <= 1'b0;
      seen       <= 1'b0;
      out_valid  <= 1'b0;
      out_sof    <= 1'b0;
      out_data   <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (in_valid) begin
        fcnt <= k + 1'b1;
        if (in_sof) begin
          wsel       <= ~wsel;
          seen       <= 1'b1;
          have_frame <= seen;
        end
        // read side: natural order from the buffer written last frame
        out_valid <= in_sof ? seen : have_frame;
        out_sof   <= in_sof && seen;
        out_data  <= buffer[in_sof ? wsel : ~wsel][k];
      end
    end
  end
endmodule
