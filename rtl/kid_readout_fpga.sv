// kid_readout_fpga: firmware of one readout FPGA board.
//
// Each FPGA board serves NCHAINS independent readout chains (two in the
// flight arrangement; eight chains in all take four boards). Each chain has
// its own configuration port, DAC and ADC sample streams and TOD output;
// the chains share only the clock and reset. The RF switching between the
// two instruments, the converters and the SpaceWire link to the spacecraft
// computer are outside this module: tod[c] is what the I/O card would
// packetize for chain c.
module kid_readout_fpga
  import kid_pkg::*;
#(
  parameter int unsigned NCHAINS   = 2,
  parameter int unsigned N         = 1024,
  parameter int unsigned NTONES    = 1024,
  parameter int unsigned TAPS      = 4,
  parameter int unsigned ACC_LEN   = 488,
  parameter int unsigned MF_LEN    = 8
) (
  input  logic                     clk,
  input  logic                     rst,
  input  cfg_wr_t                  cfg       [NCHAINS],
  output logic                     dac_valid [NCHAINS],
  output logic signed [CONV_W-1:0] dac_data  [NCHAINS],
  input  logic signed [CONV_W-1:0] adc_data  [NCHAINS],
  output tod_t                     raw_tod   [NCHAINS],
  output tod_t                     tod       [NCHAINS]
);
  for (genvar c = 0; c < NCHAINS; c++) begin : g_chain
    readout_chain #(
      .N(N), .NTONES(NTONES), .TAPS(TAPS), .ACC_LEN(ACC_LEN), .MF_LEN(MF_LEN)
    ) u_chain (
      .clk, .rst,
      .cfg       (cfg[c]),
      .dac_valid (dac_valid[c]),
      .dac_data  (dac_data[c]),
      .adc_data  (adc_data[c]),
      .raw_tod   (raw_tod[c]),
      .tod       (tod[c])
    );
  end
endmodule
