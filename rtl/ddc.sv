// ddc: digital down conversion of each tone's bin sample.
//
// A tone offset from its bin centre makes the bin sample rotate at the
// offset frequency. Multiplying by the conjugate of the same NCO phasor that
// generated the tone, y = x * (cos - j sin), stops the rotation and leaves
// the tone's in-phase (I) and quadrature (Q) response, which is what the
// detector modulates.
//
// Interface: sel (from bin_select) and nco must present the same tone on the
// same clock; an assertion checks it. The product is rounded by 2^-15 and
// registered: one clock of latency.
// From the paper: NCO-driven digital down conversion after bin selection,
// same frequency resolution as the synthesis side.
module ddc
  import kid_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  tone_smp_t sel,
  input  nco_t      nco,
  output tone_smp_t out
);
  logic signed [BIN_W+16:0] pr, pi;
  always_comb begin
    pr = sel.d.re * nco.c + sel.d.im * nco.s;
    pi = sel.d.im * nco.c - sel.d.re * nco.s;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out <= '0;
    end else begin
      out.valid <= sel.valid;
      out.tone  <= sel.tone;
      out.d.re  <= BIN_W'((pr + (1 <<< 14)) >>> 15);
      out.d.im  <= BIN_W'((pi + (1 <<< 14)) >>> 15);
    end
  end

  a_same_tone: assert property (@(posedge clk) disable iff (rst)
    sel.valid |-> (nco.valid && nco.tone == sel.tone));
endmodule
