// sincos_lut: combinational cosine and sine of a 10-bit phase.
//
// A phase p (0..1023) stands for the angle 2*pi*p/1024. The module holds one
// quarter wave, T[i] = round(32767 * sin(2*pi*i/1024)) for i = 0..256, read
// from sin_quarter.hex, and folds the other three quadrants onto it by
// symmetry. Both the NCOs (which use the top 10 bits of their 16-bit phase)
// and the FFT twiddle factors use this table. The table size and the
// quarter-wave folding are this design's choices; the paper does not describe
// how the sinusoids are produced. Purely combinational: no clock, no latency.
module sincos_lut (
  input  logic [9:0]         phase,
  output logic signed [15:0] cos_o,
  output logic signed [15:0] sin_o
);
  logic signed [15:0] quarter [0:256];
  initial $readmemh("rtl/sin_quarter.hex", quarter);

  function automatic logic signed [15:0] sin_of(input logic [9:0] p);
    logic [7:0] idx;
    idx = p[7:0];
    unique case (p[9:8])
      2'd0: return quarter[9'(idx)];
      2'd1: return quarter[9'd256 - 9'(idx)];
      2'd2: return -quarter[9'(idx)];
      default: return -quarter[9'd256 - 9'(idx)];
    endcase
  endfunction

  always_comb begin
    sin_o = sin_of(phase);
    cos_o = sin_of(phase + 10'd256);
  end
endmodule
