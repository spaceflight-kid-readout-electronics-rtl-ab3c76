// tb_science_rates: the fractional resampler at the ends of the science-rate
// range, 700 Hz and 100 Hz out of the 10.006 kHz TOD (5 GS/s / 1024 / 488).
//
// The steps are 10006/700 and 10006/100 input samples per output, rounded to
// 16.16 fixed point (936802 and 6557532). Two tones carry straight lines in
// I and Q (I = 1000*n + 7*tone, Q = -500*n), so linear interpolation is exact
// and the m-th output must equal the line at time m*STEP within 1 LSB. Each
// output must leave with input sample ceil(m*STEP), and 1500 input samples
// must give floor(1499/STEP)+1 outputs per tone. The reference times are
// worked out from the integer step, so the fixed-point rounding of the
// step is part of what is checked.
module tb_science_rates;
  import kid_pkg::*;
  localparam int NT = 2;

  logic clk = 1'b0, rst = 1'b1;
  cfg_wr_t cfg = '0;
  tod_t in = '0, out;
  always #1 clk = ~clk;

  frac_resampler #(.NTONES(NT)) dut (.clk, .rst, .cfg, .in, .out);

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
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real step_r;
  real tau;          // time of the next expected output
  int  n_in = -1;    // index of the last input sample
  int  outs = 0, flagged = 0;
  bit  pend = 1'b0;
  int  pend_n;
  int  pend_t;
  real pend_tau;
  int  glitch_at = -1;

  always @(posedge clk) begin
    if (!rst) begin
      if (pend) begin
        int wi, wq;
        wi = int'($floor(1000.0 * pend_tau + 0.5)) + 7 * pend_t;
        wq = int'($floor(-500.0 * pend_tau + 0.5));
        check(out.valid, $sformatf("missing output at input %0d", pend_n));
        check(int'(out.tone) == pend_t && int'(out.i) - wi <= 1 && wi - int'(out.i) <= 1 &&
              int'(out.q) - wq <= 1 && wq - int'(out.q) <= 1,
              $sformatf("t=%f tone %0d got (%0d,%0d) want (%0d,%0d)", pend_tau, pend_t, out.i, out.q, wi, wq));
        if (glitch_at >= 0)
          check(out.glitch == (pend_tau > real'(glitch_at - 1) && pend_tau < real'(glitch_at + 1)),
                $sformatf("glitch flag at t=%f", pend_tau));
        if (out.glitch) flagged++;
        if (pend_t == NT - 1) tau += step_r;
        outs++;
      end else if (n_in >= 0) begin
        check(!out.valid, "unexpected output");
      end
      pend = 1'b0;
      if (in.valid) begin
        if (in.tone == 0) n_in++;
        if (real'(n_in) >= tau - 1e-9) begin
          pend = 1'b1; pend_n = n_in; pend_t = int'(in.tone); pend_tau = tau;
        end
      end
    end
  end

  int smp = 0;
  task automatic run(input int samples);
    for (int s = 0; s < samples; s++) begin
      for (int c = 0; c < 4; c++) begin
        @(negedge clk);
        if (c < NT)
          in = '{valid: 1'b1, tone: TONE_W'(c), glitch: (smp == glitch_at),
                 i: TOD_W'(1000 * smp + 7 * c), q: TOD_W'(-500 * smp)};
        else in = '0;
      end
      smp++;
    end
  endtask

  localparam int NSMP = 1500;
  task automatic rate(input int step_fx, input string name);
    int want;
    @(negedge clk); in = '0;
    repeat (2) @(negedge clk);
    rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    glitch_at = -1; smp = 0; n_in = -1; tau = 0.0; outs = 0;
    step_r = real'(step_fx) / 65536.0;
    wr(REG_RS_STEP, 32'(step_fx));
    run(NSMP);
    @(negedge clk); in = '0;
    repeat (3) @(posedge clk);
    want = NT * ((NSMP - 1) * 65536 / step_fx + 1);
    check(outs == want, $sformatf("%s: %0d outputs, want %0d", name, outs, want));
    $display("%s: step %f, %0d outputs per tone from %0d inputs", name, step_r, outs / NT, NSMP);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rate(936802, "700 Hz");
    rate(6557532, "100 Hz");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
