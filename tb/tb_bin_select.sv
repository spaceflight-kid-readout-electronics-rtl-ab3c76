// tb_bin_select: self-checking test of bin selection.
//
// N = 16 bins, eight tones. Frame f carries, at bin k, the value
// (100*f + k, -(100*f + k)), sent in bit-reversed bin order as the FFT
// delivers it. Tone sweeps (one tone per clock) start 5 clocks after each
// frame start, so a sweep always straddles a frame boundary. Tones 2, 3 and 6
// name the same bin. Each output must be the tone's bin of the last frame
// completed before the sweep began, tagged with the tone, one clock after
// the request.
module tb_bin_select;
  import kid_pkg::*;
  localparam int N = 16, NT = 8, LOGN = 4, FRAMES = 20, OFS = 5;

  logic clk = 1'b0, rst = 1'b1;
  cfg_wr_t cfg = '0;
  logic in_valid = 1'b0, in_sof = 1'b0;
  cbin_t in_data = '0;
  nco_t req = '0;
  tone_smp_t out;
  always #1 clk = ~clk;

  bin_select #(.N(N), .NTONES(NT)) dut (
    .clk, .rst, .cfg, .in_valid, .in_sof, .in_data, .req, .out);

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
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tbin [NT] = '{1, 7, 12, 12, 0, 15, 12, 4};
  int cur_frame = -1, done_frame = -1, sweep_frame = -1;
  bit pend = 1'b0;
  int pend_tone;

  always @(posedge clk) begin
    if (!rst) begin
      if (pend) begin
        int v;
        v = 100 * sweep_frame + tbin[pend_tone];
        check(out.valid && int'(out.tone) == pend_tone, "tone tag");
        if (sweep_frame >= 0)
          check(int'(out.d.re) == v && int'(out.d.im) == -v,
                $sformatf("tone %0d got %0d want %0d", pend_tone, out.d.re, v));
      end
      pend = req.valid;
      pend_tone = int'(req.tone);
      if (req.valid && req.tone == 0) sweep_frame = done_frame;
      if (in_valid && in_sof) begin
        done_frame = cur_frame;
        cur_frame++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int t = 0; t < NT; t++) wr(REG_BIN + 16'(t), 32'(tbin[t]));
    for (int f = 0; f < FRAMES; f++)
      for (int j = 0; j < N; j++) begin
        int k, v;
        @(negedge clk);
        k = int'(bitrev(16'(j), LOGN));
        v = 100 * f + k;
        in_valid = 1'b1;
        in_sof   = (j == 0);
        in_data  = '{re: BIN_W'(v), im: BIN_W'(-v)};
        if (f > 0 && j >= OFS && j < OFS + NT)
          req = '{valid: 1'b1, tone: TONE_W'(j - OFS), c: '0, s: '0};
        else
          req = '0;
      end
    @(negedge clk); in_valid = 1'b0; req = '0;
    repeat (4) @(posedge clk);
    check(checks >= 2 * (FRAMES - 2) * NT, "all sweeps checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
