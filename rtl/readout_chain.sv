// readout_chain: one complete KID readout chain, DAC out to TOD out.
//
// A free-running sample counter divides the converter sample stream into
// frames of N samples; its tick starts an NCO sweep every frame.
//   transmit: nco_bank -> pfb_synthesis -> dac_data (12 bits, 1 per clock)
//   receive:  adc_data -> pfb_analysis -> bin_select -> ddc
//             -> tod_accumulator (10 kHz) -> glitch_remover
//             -> frac_resampler -> tod (science rate)
// The NCO stream drives both the synthesis side and, one register later, the
// down-conversion, so each tone is received with exactly the frequency it
// was sent with; any delay of the analog loop only adds a constant phase.
//
// Interface: cfg register writes (map in kid_pkg); dac_valid/dac_data to the
// DAC; adc_data from the ADC, one sample per clock (frames start at the same
// counter value as on the transmit side); tod records one tone at a time,
// raw_tod the full-rate records before glitch removal, for diagnostics.
// Everything runs on one clock at the converter sample rate.
//
// The block structure and its order follow the paper's block diagram of a
// readout chain; sizes inside the blocks are set by the parameters below.
module readout_chain
  import kid_pkg::*;
#(
  parameter int unsigned N         = 1024,
  parameter int unsigned NTONES    = 1024,
  parameter int unsigned TAPS      = 4,
  parameter int unsigned ACC_LEN   = 488,
  parameter int unsigned ACC_SHIFT = 1,
  parameter int unsigned MF_LEN    = 8,
  parameter int unsigned DAC_SHIFT = 9
) (
  input  logic                     clk,
  input  logic                     rst,
  input  cfg_wr_t                  cfg,
  output logic                     dac_valid,
  output logic signed [CONV_W-1:0] dac_data,
  input  logic signed [CONV_W-1:0] adc_data,
  output tod_t                     raw_tod,
  output tod_t                     tod
);
  localparam int unsigned LOGN = $clog2(N);

  logic [LOGN-1:0] scnt;
  logic            tick;
  always_ff @(posedge clk) begin
    if (rst) scnt <= '0;
    else     scnt <= scnt + 1'b1;
  end
  assign tick = !rst && scnt == '0;

  nco_t nco, nco_d;
  nco_bank #(.NTONES(NTONES)) u_nco (
    .clk, .rst, .cfg, .frame_tick(tick), .out(nco)
  );
  always_ff @(posedge clk) begin
    if (rst) nco_d <= '0;
    else     nco_d <= nco;
  end

  pfb_synthesis #(.N(N), .NTONES(NTONES), .TAPS(TAPS), .DAC_SHIFT(DAC_SHIFT)) u_syn (
    .clk, .rst, .cfg, .nco, .dac_valid, .dac_data
  );

  logic  a_v, a_s;
  cbin_t a_d;
  pfb_analysis #(.N(N), .TAPS(TAPS)) u_ana (
    .clk, .rst, .cfg,
    .adc_valid(!rst), .adc_sof(tick), .adc_data,
    .out_valid(a_v), .out_sof(a_s), .out_data(a_d)
  );

  tone_smp_t sel, dd;
  bin_select #(.N(N), .NTONES(NTONES)) u_sel (
    .clk, .rst, .cfg, .in_valid(a_v), .in_sof(a_s), .in_data(a_d), .req(nco), .out(sel)
  );

  ddc u_ddc (.clk, .rst, .sel, .nco(nco_d), .out(dd));

  tod_t deg;
  tod_accumulator #(.NTONES(NTONES), .ACC_LEN(ACC_LEN), .ACC_SHIFT(ACC_SHIFT)) u_acc (
    .clk, .rst, .in(dd), .out(raw_tod)
  );

  glitch_remover #(.NTONES(NTONES), .MF_LEN(MF_LEN)) u_gl (
    .clk, .rst, .cfg, .in(raw_tod), .out(deg)
  );

  frac_resampler #(.NTONES(NTONES)) u_rs (
    .clk, .rst, .cfg, .in(deg), .out(tod)
  );
endmodule
