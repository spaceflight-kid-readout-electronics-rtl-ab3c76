// tb_pfb_synthesis: self-checking test of the synthesis filterbank.
//
// N = 64 tbin, four tones, two taps per branch, no output shift. The test
// plays the NCO bank itself: every 64 clocks it sends a sweep of four tone
// phasors with random angles. Tones 1 and 2 share bin 9 to exercise bin
// sharing. The window is h[k] = 0.5 (newest frame) and h[N+k] = 0.25. The
// reference builds each frame's spectrum X_k = sum amp*phasor >> 15, takes
// z[n] = Re sum_k X_k exp(+j*2*pi*k*n/N) and applies the window; DAC samples
// must agree within 3 LSB. Frame j (NCO sweep starting at T_j) must come out
// of the DAC starting exactly 3N + log2(N) + 3 clocks after T_j.
module tb_pfb_synthesis;
  import kid_pkg::*;
  localparam int N = 64, NT = 4, TAPS = 2, LOGN = 6, FRAMES = 14;

  logic clk = 1'b0, rst = 1'b1;
  cfg_wr_t cfg = '0;
  nco_t nco = '0;
  logic dac_valid;
  logic signed [CONV_W-1:0] dac_data;
  always #1 clk = ~clk;

  pfb_synthesis #(.N(N), .NTONES(NT), .TAPS(TAPS), .DAC_SHIFT(0)) dut (
    .clk, .rst, .cfg, .nco, .dac_valid, .dac_data);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); cfg = '{we: 1'b1, addr: a, data: d};
    @(negedge clk); cfg.we = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int amp [NT] = '{800, 500, 400, 600};
  int tbin[NT] = '{3, 9, 9, 20};
  int pc [FRAMES][NT], ps [FRAMES][NT];
  real z [FRAMES][N];
  int t0 [FRAMES];
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  real pi2 = 2.0 * 3.14159265358979;

  task automatic model();
    for (int f = 0; f < FRAMES; f++) begin
      int xr [N], xi [N];
      for (int k = 0; k < N; k++) begin xr[k] = 0; xi[k] = 0; end
      for (int t = 0; t < NT; t++) begin
        xr[tbin[t]] += (amp[t] * pc[f][t]) >>> 15;
        xi[tbin[t]] += (amp[t] * ps[f][t]) >>> 15;
      end
      for (int n = 0; n < N; n++) begin
        real acc;
        acc = 0.0;
        for (int k = 0; k < N; k++)
          acc += xr[k] * $cos(pi2 * k * n / N) - xi[k] * $sin(pi2 * k * n / N);
        z[f][n] = acc;
      end
    end
  endtask

  int lat;
  initial lat = 3 * N + LOGN + 3;

  // compare DAC samples of frames 3.. with the model
  always @(posedge clk) begin
    for (int f = 3; f < FRAMES; f++) begin
      int n;
      n = cycle - (t0[f] + lat);
      if (t0[f] > 0 && n >= 0 && n < N) begin
        real want;
        int w;
        want = $floor((16384.0 * $floor(z[f][n] + 0.0) + 8192.0 * $floor(z[f-1][n])) / 32768.0);
        w = int'(want);
        check(dac_valid && int'(dac_data) - w <= 3 && w - int'(dac_data) <= 3,
              $sformatf("frame %0d n %0d got %0d want %0d", f, n, dac_data, w));
      end
    end
  end

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      t0[f] = 0;
      for (int t = 0; t < NT; t++) begin
        real a;
        a = pi2 * real'($urandom_range(1023)) / 1024.0;
        pc[f][t] = int'($floor(32767.0 * $cos(a)));
        ps[f][t] = int'($floor(32767.0 * $sin(a)));
      end
    end
    model();
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int t = 0; t < NT; t++) begin
      wr(REG_AMP + 16'(t), 32'(amp[t]));
      wr(REG_BIN + 16'(t), 32'(tbin[t]));
    end
    for (int k = 0; k < N; k++) begin
      wr(REG_SYN_COEF + 16'(k), 32'd16384);
      wr(REG_SYN_COEF + 16'(N + k), 32'd8192);
    end
    for (int f = 0; f < FRAMES + 4; f++) begin
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        if (c < NT && f < FRAMES) begin
          if (c == 0) t0[f] = cycle;
          nco = '{valid: 1'b1, tone: TONE_W'(c), c: 16'(pc[f][c]), s: 16'(ps[f][c])};
        end else if (c < NT) begin
          nco = '{valid: 1'b1, tone: TONE_W'(c), c: 16'd0, s: 16'd0};
        end else begin
          nco = '0;
        end
      end
    end
    repeat (4 * N) @(posedge clk);
    check(checks >= (FRAMES - 3) * N, "all frames compared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
