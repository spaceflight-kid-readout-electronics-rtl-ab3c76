// tb_full_tone_load: both readout chains fully loaded, at the top's defaults.
//
// One chain must read 1008 detectors plus a few blind tones. Here every one
// of the 1024 tone slots of each chain carries a tone:
//   tones 0..1007     detector tones spread over bins 82..491 (0.40-2.40 GHz
//                     at 5 GS/s), two or three to a bin, amplitudes varying
//                     from 3000 to 4999 as bias powers would;
//   tones 1008..1023  blind tones in bins 20..65, below the band.
// Tones sharing a bin sit at different offsets inside it: tuning words
// -32768 + 8192*(t mod 8). Their differences are multiples of 8192, so every
// beat between two tones turns a whole number of times (61 or a multiple)
// over the 488 frames of one TOD sample and cancels in the accumulator.
// Phase offsets follow a quadratic sequence so the comb has a noise-like
// crest factor and does not saturate the 12-bit DAC. Chain 1 runs the same
// plan at half amplitude.
// DAC output is looped back to the ADC with a delay of N-15 clocks, which
// lines each analysis frame up with one synthesis frame (a DAC frame leaves
// 15 clocks after the frame tick, modulo N). With the rectangular windows
// used here a misaligned loop lets the frame-to-frame phase steps of offset
// tones leak a few 1/N of their level into every bin; with 1024 tones that
// sums to about 10%, so this test keeps the frames aligned. Checks:
//   - every tone's 10 kHz I/Q magnitude is within 5% of
//     amp * 2^-DAC_SHIFT * N/2 * ACC_LEN / 2 (the on-bin loop gain);
//   - each tone's TOD holds still (two later samples agree within 2%);
//   - the science output, with the glitch threshold at its reset value and
//     the resampler step at 1.0, is the raw TOD delayed by MF_LEN-1 samples,
//     bit for bit, and never flagged.
module tb_full_tone_load;
  import kid_pkg::*;
  localparam int NCH = 2, N = 1024, NT = 1024, TAPS = 4, ACC = 488, MF = 8;
  localparam int DAC_SHIFT = 9, ACC_SHIFT = 1;
  localparam int DELAY = N - 15;       // loop delay that lines ADC frames up with DAC frames
  localparam int NDET = 1008;
  localparam int NSAMP = 12;           // raw TOD samples to run
  localparam int S0 = 4;               // first sample checked
  localparam int WATCHDOG = 10000000;

  logic clk = 1'b0, rst = 1'b1;
  cfg_wr_t cfg [NCH];
  logic dac_valid [NCH];
  logic signed [CONV_W-1:0] dac_data [NCH];
  logic signed [CONV_W-1:0] adc_data [NCH];
  tod_t raw_tod [NCH], tod [NCH];
  always #1 clk = ~clk;

  kid_readout_fpga dut (
    .clk, .rst, .cfg, .dac_valid, .dac_data, .adc_data, .raw_tod, .tod);

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

  // ---------------- frame-aligned loopback ----------------
  logic signed [CONV_W-1:0] dly [NCH][DELAY];
  always_ff @(posedge clk)
    for (int c = 0; c < NCH; c++) begin
      dly[c][0] <= dac_data[c];
      for (int d = 1; d < DELAY; d++) dly[c][d] <= dly[c][d-1];
    end
  always_comb
    for (int c = 0; c < NCH; c++) adc_data[c] = dly[c][DELAY-1];

  // full-scale detection: count DAC samples at the rails once the tone
  // tables and windows are loaded and the pipeline holds only their frames
  int n_rail = 0;
  bit armed = 1'b0;
  always @(posedge clk)
    for (int c = 0; c < NCH; c++)
      if (armed && dac_valid[c] && (dac_data[c] == 12'sh7FF || dac_data[c] == -12'sh800)) n_rail++;

  // ---------------- tone plan ----------------
  function automatic int amp_of(input int t);
    return (t < NDET) ? 3000 + (t * 37) % 2000 : 4000;
  endfunction
  function automatic int bin_of(input int t);
    return (t < NDET) ? 82 + (t * 410) / NDET : 20 + (t - NDET) * 3;
  endfunction
  function automatic int ftw_of(input int t);
    return -32768 + 8192 * (t % 8);
  endfunction
  function automatic int phofs_of(input int t);
    return (t * t * 40503 + t * 12345) % 65536;
  endfunction

  // ---------------- recording ----------------
  int raw_i [NCH][NT][NSAMP+2], raw_q [NCH][NT][NSAMP+2], n_raw [NCH][NT];
  int out_i [NCH][NT][NSAMP+2], out_q [NCH][NT][NSAMP+2], n_out [NCH][NT];
  int n_flag = 0;

  always @(posedge clk) begin
    if (!rst)
      for (int c = 0; c < NCH; c++) begin
        if (raw_tod[c].valid) begin
          int t, k;
          t = int'(raw_tod[c].tone); k = n_raw[c][t];
          if (k < NSAMP + 2) begin raw_i[c][t][k] = int'(raw_tod[c].i); raw_q[c][t][k] = int'(raw_tod[c].q); end
          n_raw[c][t]++;
        end
        if (tod[c].valid) begin
          int t, k;
          t = int'(tod[c].tone); k = n_out[c][t];
          if (k < NSAMP + 2) begin out_i[c][t][k] = int'(tod[c].i); out_q[c][t][k] = int'(tod[c].q); end
          if (tod[c].glitch) n_flag++;
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

  int n_shared_bins = 0, max_per_bin = 0;

  initial begin
    int per_bin [N];
    for (int c = 0; c < NCH; c++) begin
      cfg[c] = '0;
      for (int t = 0; t < NT; t++) begin n_raw[c][t] = 0; n_out[c][t] = 0; end
    end
    for (int k = 0; k < N; k++) per_bin[k] = 0;
    for (int t = 0; t < NT; t++) per_bin[bin_of(t)]++;
    for (int k = 0; k < N; k++) begin
      if (per_bin[k] > 1) n_shared_bins++;
      if (per_bin[k] > max_per_bin) max_per_bin = per_bin[k];
    end
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int t = 0; t < NT; t++) begin
      wr_all(REG_AMP + 16'(t), 32'(amp_of(t)), 32'(amp_of(t) / 2));
      wr_all(REG_BIN + 16'(t), 32'(bin_of(t)), 32'(bin_of(t)));
      wr_all(REG_FTW + 16'(t), 32'(ftw_of(t)), 32'(ftw_of(t)));
      wr_all(REG_PHOFS + 16'(t), 32'(phofs_of(t)), 32'(phofs_of(t)));
    end
    for (int i = 0; i < TAPS * N; i++) begin
      wr_all(REG_SYN_COEF + 16'(i), (i < N) ? 32'd32767 : 32'd0, (i < N) ? 32'd32767 : 32'd0);
      wr_all(REG_ANA_COEF + 16'(i), (i < N) ? 32'd32767 : 32'd0, (i < N) ? 32'd32767 : 32'd0);
    end
    wr_all(REG_NCO_CLR, 32'd1, 32'd1);
    repeat (8 * N) @(negedge clk);
    armed = 1'b1;

    wait (n_raw[0][NT-1] >= NSAMP && n_raw[NCH-1][NT-1] >= NSAMP);
    repeat (10) @(posedge clk);

    // ---------------- evaluation ----------------
    for (int c = 0; c < NCH; c++)
      for (int t = 0; t < NT; t++) begin
        real want, m, dev;
        want = real'(c == 0 ? amp_of(t) : amp_of(t) / 2) * (32767.0 / 32768.0)
               / real'(1 << DAC_SHIFT) * real'(N / 2) * real'(ACC) / real'(1 << ACC_SHIFT);
        m = mag(raw_i[c][t][S0], raw_q[c][t][S0]);
        check(m > 0.95 * want && m < 1.05 * want,
              $sformatf("chain %0d tone %0d (bin %0d) magnitude %f want %f", c, t, bin_of(t), m, want));
        dev = mag(raw_i[c][t][NSAMP-1] - raw_i[c][t][S0], raw_q[c][t][NSAMP-1] - raw_q[c][t][S0]);
        check(dev < 0.02 * want,
              $sformatf("chain %0d tone %0d TOD moved by %f", c, t, dev));
        for (int k = 0; k + MF - 1 < n_out[c][t] && k + MF - 1 < NSAMP; k++)
          check(out_i[c][t][k + MF - 1] == raw_i[c][t][k] && out_q[c][t][k + MF - 1] == raw_q[c][t][k],
                $sformatf("chain %0d tone %0d science sample %0d differs from raw sample %0d",
                          c, t, k + MF - 1, k));
      end
    $display("load: %0d tones per chain, %0d shared bins, up to %0d tones in a bin, %0d DAC samples at the rails",
             NT, n_shared_bins, max_per_bin, n_rail);
    check(n_shared_bins > 0, "no bin shared by tones");
    check(n_rail == 0, "DAC saturated");
    check(n_flag == 0, "glitch flagged with the threshold at its reset value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
