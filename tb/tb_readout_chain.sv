// tb_readout_chain: end-to-end loopback test of the readout firmware (one chain, reduced size).
//
// Each chain's DAC output is fed back to its ADC with a 3-clock delay (not a
// multiple of the frame, so analysis frames straddle synthesis frames), as
// in a loopback of the RF electronics. Five tones are configured per chain:
//   tone 0  alone in bin B0, on the bin centre: its I/Q magnitude must match
//           A0 * 2^-DAC_SHIFT * N/2 * ACC_LEN / 2 within 5%
//   tones 1 and 2 share bin B1 (tone 2 is offset by a quarter turn per
//           frame, so their beat cancels over ACC_LEN, a multiple of 4)
//   tone 3  offset from its bin centre by an arbitrary tuning word
//   tone 4  amplitude 0: must read back near zero (isolation)
// Every further tone slot is silent. The second chain, where present, uses
// half the amplitudes. After the settling time every raw 10 kHz-class TOD
// sample must stay within 3% of tone 0's magnitude of its settled value,
// except while the loop gain is dipped to 10/16 for two TOD periods, which
// imitates a cosmic-ray glitch. The dip must be flagged by the glitch
// remover, and every science-rate output must still sit at the settled
// value (replaced samples hold the last good one). The resampler runs at a
// step of 1.5 TOD samples. The test counts how often each mechanism
// happened (shared bin, offset tone, glitch flagged, fractional
// resampling, NCO phase clear) and fails if one never did.
module tb_readout_chain;
  import kid_pkg::*;
  localparam int NCH = 1, N = 64, NT = 8, TAPS = 2, ACC = 4, MF = 4;
  localparam int DAC_SHIFT = 9, ACC_SHIFT = 1, DELAY = 3;
  localparam int NSAMP  = 48;          // raw TOD samples to run
  localparam int SETTLE = 14;          // raw TOD samples ignored at start
  localparam int DIP_AT = 28;          // raw TOD sample where the dip starts
  localparam int B0 = 5, B1 = 9, B3 = 20, B4 = 27;
  localparam int WATCHDOG = 200000;
  localparam int PERIOD = ACC * N;     // clocks per raw TOD sample

  logic clk = 1'b0, rst = 1'b1;
  cfg_wr_t cfg [NCH];
  logic dac_valid [NCH];
  logic signed [CONV_W-1:0] dac_data [NCH];
  logic signed [CONV_W-1:0] adc_data [NCH];
  tod_t raw_tod [NCH], tod [NCH];
  always #1 clk = ~clk;

  readout_chain #(.N(N), .NTONES(NT), .TAPS(TAPS), .ACC_LEN(ACC), .MF_LEN(MF)) dut (
    .clk, .rst, .cfg(cfg[0]), .dac_valid(dac_valid[0]), .dac_data(dac_data[0]),
    .adc_data(adc_data[0]), .raw_tod(raw_tod[0]), .tod(tod[0]));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- loopback: DAC -> delay -> gain -> ADC ----------------
  int gain = 16;
  logic signed [CONV_W-1:0] dly [NCH][DELAY];
  always_ff @(posedge clk)
    for (int c = 0; c < NCH; c++) begin
      dly[c][0] <= dac_data[c];
      for (int d = 1; d < DELAY; d++) dly[c][d] <= dly[c][d-1];
    end
  always_comb
    for (int c = 0; c < NCH; c++)
      adc_data[c] = CONV_W'((int'(dly[c][DELAY-1]) * gain) >>> 4);

  // ---------------- tone plan ----------------
  localparam int NCHK = 5;
  int amp [NCHK] = '{20000, 12000, 9000, 8000, 0};
  int tbin[NCHK] = '{B0, B1, B1, B3, B4};
  int ftw [NCHK] = '{0, 0, 16384, 62536, 0};
  real mag0;

  // ---------------- recording ----------------
  localparam int MAXS = NSAMP + 8;
  int raw_i [NCH][NCHK][MAXS], raw_q [NCH][NCHK][MAXS], n_raw [NCH][NCHK];
  int out_i [NCH][NCHK][MAXS], out_q [NCH][NCHK][MAXS], n_out [NCH][NCHK];
  bit out_g [NCH][NCHK][MAXS];
  int dip_start = -1;

  always @(posedge clk) begin
    if (!rst)
      for (int c = 0; c < NCH; c++) begin
        if (raw_tod[c].valid && int'(raw_tod[c].tone) < NCHK) begin
          int t, k;
          t = int'(raw_tod[c].tone); k = n_raw[c][t];
          if (k < MAXS) begin raw_i[c][t][k] = int'(raw_tod[c].i); raw_q[c][t][k] = int'(raw_tod[c].q); end
          n_raw[c][t]++;
        end
        if (tod[c].valid && int'(tod[c].tone) < NCHK) begin
          int t, k;
          t = int'(tod[c].tone); k = n_out[c][t];
          if (k < MAXS) begin
            out_i[c][t][k] = int'(tod[c].i); out_q[c][t][k] = int'(tod[c].q); out_g[c][t][k] = tod[c].glitch;
          end
          n_out[c][t]++;
        end
      end
  end

  task automatic wr_all(input logic [15:0] a, input logic [31:0] d0, input logic [31:0] d1);
    @(negedge clk);
    for (int c = 0; c < NCH; c++) cfg[c] = '{we: 1'b1, addr: a, data: (c == 0) ? d0 : d1};
    @(negedge clk);
    for (int c = 0; c < NCH; c++) cfg[c].we = 1'b0;
  endtask

  function automatic real mag(input int i, input int q);
    return $sqrt(real'(i) * real'(i) + real'(q) * real'(q));
  endfunction

  int m_shared = 0, m_glitch = 0, m_resample = 0, m_clear = 0, m_offset = 0, m_dip_seen = 0;

  initial begin
    for (int c = 0; c < NCH; c++) begin
      cfg[c] = '0;
      for (int t = 0; t < NCHK; t++) begin n_raw[c][t] = 0; n_out[c][t] = 0; end
    end
    mag0 = real'(amp[0]) * (32767.0 / 32768.0) / real'(1 << DAC_SHIFT) * real'(N / 2)
           * real'(ACC) / real'(1 << ACC_SHIFT);
    repeat (3) @(posedge clk);
    rst = 1'b0;
    // tone tables (chain 1 gets half the amplitudes)
    for (int t = 0; t < NT; t++) begin
      int a, b, f;
      a = (t < NCHK) ? amp[t] : 0;
      b = (t < NCHK) ? tbin[t] : 0;
      f = (t < NCHK) ? ftw[t] : 0;
      wr_all(REG_AMP + 16'(t), 32'(a), 32'(a / 2));
      wr_all(REG_BIN + 16'(t), 32'(b), 32'(b));
      wr_all(REG_FTW + 16'(t), 32'(f), 32'(f));
      wr_all(REG_PHOFS + 16'(t), 32'(t * 5000), 32'(t * 7000));
    end
    // rectangular windows: newest frame weight 32767/32768, older frames 0
    for (int i = 0; i < TAPS * N; i++) begin
      wr_all(REG_SYN_COEF + 16'(i), (i < N) ? 32'd32767 : 32'd0, (i < N) ? 32'd32767 : 32'd0);
      wr_all(REG_ANA_COEF + 16'(i), (i < N) ? 32'd32767 : 32'd0, (i < N) ? 32'd32767 : 32'd0);
    end
    // step-detecting matched filter, threshold a sixteenth of tone 0's level
    for (int j = 0; j < MF; j++)
      wr_all(REG_GL_TPL + 16'(j), (j < MF / 2) ? 32'(65536 / MF) : -32'(65536 / MF),
                                  (j < MF / 2) ? 32'(65536 / MF) : -32'(65536 / MF));
    wr_all(REG_GL_THR, 32'(int'(mag0 / 16.0)), 32'(int'(mag0 / 32.0)));
    wr_all(REG_GL_HOLD, 32'd4, 32'd4);
    wr_all(REG_RS_STEP, 32'h0001_8000, 32'h0001_8000);
    wr_all(REG_NCO_CLR, 32'd1, 32'd1);
    m_clear++;

    // run; dip the loop gain for two TOD periods when sample DIP_AT arrives
    wait (n_raw[0][0] >= DIP_AT);
    dip_start = DIP_AT;
    @(negedge clk); gain = 10;
    repeat (2 * PERIOD) @(negedge clk);
    gain = 16;
    wait (n_raw[0][0] >= NSAMP && n_raw[NCH-1][NCHK-1] >= NSAMP);
    repeat (10) @(posedge clk);

    // ---------------- evaluation ----------------
    for (int c = 0; c < NCH; c++) begin
      real m0, scale;
      int ri [NCHK], rq [NCHK];
      scale = (c == 0) ? 1.0 : 0.5;
      for (int t = 0; t < NCHK; t++) begin ri[t] = raw_i[c][t][SETTLE]; rq[t] = raw_q[c][t][SETTLE]; end
      m0 = mag(ri[0], rq[0]);
      check(m0 > 0.95 * scale * mag0 && m0 < 1.05 * scale * mag0,
            $sformatf("chain %0d tone 0 magnitude %f want %f", c, m0, scale * mag0));
      check(mag(ri[4], rq[4]) < 0.03 * m0,
            $sformatf("chain %0d silent tone reads %f", c, mag(ri[4], rq[4])));
      for (int t = 1; t < 4; t++)
        check(mag(ri[t], rq[t]) > 0.3 * m0 * real'(amp[t]) / real'(amp[0]),
              $sformatf("chain %0d tone %0d magnitude %f", c, t, mag(ri[t], rq[t])));
      // raw TOD stability outside the dip
      for (int t = 0; t < NCHK; t++)
        for (int k = SETTLE; k < NSAMP; k++) begin
          real dev;
          dev = mag(raw_i[c][t][k] - ri[t], raw_q[c][t][k] - rq[t]);
          if (k >= DIP_AT && k <= DIP_AT + 5) begin
            if (t == 0 && dev > 0.1 * m0) m_dip_seen++;
          end else begin
            check(dev < 0.03 * m0, $sformatf("chain %0d tone %0d raw sample %0d moved by %f", c, t, k, dev));
            if (t == 1 || t == 2) m_shared++;
            if (t == 3) m_offset++;
          end
        end
      // science-rate output: flagged around the dip, always near the settled value
      for (int t = 0; t < NCHK; t++) begin
        int first;
        first = (SETTLE + MF + 6) * 2 / 3;
        check(n_out[c][t] >= (n_raw[c][t] * 2) / 3 - 2 && n_out[c][t] <= (n_raw[c][t] * 2) / 3 + 2,
              $sformatf("chain %0d tone %0d: %0d outputs for %0d inputs", c, t, n_out[c][t], n_raw[c][t]));
        if (n_out[c][t] < n_raw[c][t]) m_resample++;
        for (int k = first; k < n_out[c][t] && k < MAXS; k++) begin
          real dev;
          dev = mag(out_i[c][t][k] - ri[t], out_q[c][t][k] - rq[t]);
          check(dev < 0.03 * m0, $sformatf("chain %0d tone %0d output %0d off by %f (flag %0d)",
                                           c, t, k, dev, out_g[c][t][k]));
          if (out_g[c][t][k]) m_glitch++;
        end
      end
    end
    $display("mechanisms: shared_bin=%0d offset_tone=%0d dip_seen=%0d glitch_flagged=%0d frac_resample=%0d nco_clear=%0d",
             m_shared, m_offset, m_dip_seen, m_glitch, m_resample, m_clear);
    check(m_shared > 0, "shared bin never exercised");
    check(m_offset > 0, "offset tone never exercised");
    check(m_dip_seen > 0, "gain dip never reached the TOD");
    check(m_glitch > 0, "no glitch flagged");
    check(m_resample > 0, "no fractional resampling");
    check(m_clear > 0, "no NCO phase clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
