// tb_pfb_analysis: self-checking test of the analysis filterbank.
//
// N = 64 bins, two taps per branch. The window is h[k] = 0.5 for the newest
// frame and h[N+k] = 0.25 for the one before, so the FIR output is
// floor((16384*x_f[k] + 8192*x_{f-1}[k]) / 32768). Random 12-bit samples
// are streamed for 12 frames; for every frame from the second on, each of
// the 64 bins (arriving in bit-reversed order) is compared with a
// floating-point DFT of the FIR output, within a tolerance for the
// fixed-point twiddles. The latency from adc_sof to out_sof must be
// N + log2(N) clocks.
module tb_pfb_analysis;
  import kid_pkg::*;
  localparam int N = 64, TAPS = 2, LOGN = 6, FRAMES = 12;

  logic clk = 1'b0, rst = 1'b1;
  cfg_wr_t cfg = '0;
  logic adc_valid = 1'b0, adc_sof = 1'b0;
  logic signed [CONV_W-1:0] adc_data = '0;
  logic out_valid, out_sof;
  cbin_t out_data;
  always #1 clk = ~clk;

  pfb_analysis #(.N(N), .TAPS(TAPS)) dut (
    .clk, .rst, .cfg, .adc_valid, .adc_sof, .adc_data, .out_valid, .out_sof, .out_data);

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

  int x [FRAMES][N];
  int cycle = 0, sof_in_cycle = -1, out_frame = 0, out_idx = 0;
  always @(posedge clk) cycle <= cycle + 1;

  real pi2 = 2.0 * 3.14159265358979;
  function automatic real fabs(input real v); return v < 0.0 ? -v : v; endfunction

  always @(posedge clk) begin
    if (adc_valid && adc_sof && sof_in_cycle < 0) sof_in_cycle = cycle;
    if (out_valid) begin
      if (out_sof) begin
        if (out_frame == 0)
          check(cycle - sof_in_cycle == N + LOGN, $sformatf("latency %0d", cycle - sof_in_cycle));
        out_idx = 0;
      end
      if (out_frame >= 1 && out_frame < FRAMES) begin
        int k;
        real re, im, mag, tol;
        k = int'(bitrev(16'(out_idx), LOGN));
        re = 0.0; im = 0.0; mag = 0.0;
        for (int n = 0; n < N; n++) begin
          int y;
          y = (16384 * x[out_frame][n] + 8192 * x[out_frame-1][n]) >>> 15;
          re += real'(y) * $cos(pi2 * k * n / N);
          im -= real'(y) * $sin(pi2 * k * n / N);
          mag += (y < 0) ? -y : y;
        end
        tol = 4.0 + mag * 2.0e-4;
        check(fabs(real'(out_data.re) - re) <= tol && fabs(real'(out_data.im) - im) <= tol,
              $sformatf("frame %0d bin %0d got (%0d,%0d) want (%f,%f)", out_frame, k,
                        out_data.re, out_data.im, re, im));
      end
      out_idx++;
      if (out_idx == N) out_frame++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int k = 0; k < N; k++) begin
      wr(REG_ANA_COEF + 16'(k), 32'd16384);
      wr(REG_ANA_COEF + 16'(N + k), 32'd8192);
    end
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++)
        x[f][n] = int'($urandom_range(4095)) - 2048;
    for (int f = 0; f < FRAMES + 2; f++)
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        adc_valid = 1'b1;
        adc_sof   = (n == 0);
        adc_data  = (f < FRAMES) ? CONV_W'(x[f][n]) : '0;
      end
    @(negedge clk); adc_valid = 1'b0;
    repeat (10) @(posedge clk);
    check(out_frame >= FRAMES, $sformatf("frames out %0d", out_frame));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
