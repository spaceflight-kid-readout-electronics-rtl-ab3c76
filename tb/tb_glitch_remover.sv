// tb_glitch_remover: self-checking test of glitch flagging and removal.
//
// Two tones with constant I/Q levels plus +-3 LSB noise, 120 samples each.
// At sample 40 tone 1 receives a cosmic-ray-like glitch, 6000*exp(-(n-40)/3)
// added to I and 3000*exp(-(n-40)/3) to Q. The matched filter is a step
// detector, tpl = (0.5, 0.5, -0.5, -0.5), threshold 1000, HOLD = 4.
// Expected: output m carries input sample m (MF_LEN-1 = 3 samples of
// delay), one clock after input sample m+3 arrives. Tone 0 is never flagged
// and passes unchanged. For tone 1 the flagged samples form one run that
// starts at or before sample 40, every flagged output repeats the last
// unflagged one, and no unflagged sample after 40 carries more than
// 300 LSB of glitch. The history is not reset, so the first WARM samples
// of each tone are a warm-up and are not checked.
module tb_glitch_remover;
  import kid_pkg::*;
  localparam int NT = 2, MF = 4, NS = 120, G0 = 40, WARM = 16;

  logic clk = 1'b0, rst = 1'b1;
  cfg_wr_t cfg = '0;
  tod_t in = '0, out;
  always #1 clk = ~clk;

  glitch_remover #(.NTONES(NT), .MF_LEN(MF)) dut (.clk, .rst, .cfg, .in, .out);

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

  int xi [NT][NS], xq [NT][NS], gl [NS];
  int base_i [NT] = '{100000, -40000};
  int base_q [NT] = '{-20000, 70000};
  int smp [NT] = '{0, 0};
  bit pend = 1'b0;
  int pend_t;
  int first_flag = -1, last_flag = -1, runs = 0;
  bit prev_flag = 1'b0;
  int last_i [NT], last_q [NT];

  always @(posedge clk) begin
    if (!rst) begin
      if (pend) begin
        int m;
        m = smp[pend_t] - MF;   // sample index leaving now
        check(out.valid && int'(out.tone) == pend_t, "valid/tone");
        if (m >= WARM) begin
          if (pend_t == 0) begin
            check(!out.glitch && int'(out.i) == xi[0][m] && int'(out.q) == xq[0][m],
                  $sformatf("tone 0 sample %0d altered", m));
          end else begin
            if (out.glitch) begin
              check(int'(out.i) == last_i[1] && int'(out.q) == last_q[1],
                    $sformatf("sample %0d not replaced by last good value", m));
              if (!prev_flag) runs++;
              if (first_flag < 0) first_flag = m;
              last_flag = m;
            end else begin
              check(int'(out.i) == xi[1][m] && int'(out.q) == xq[1][m],
                    $sformatf("tone 1 sample %0d altered", m));
              if (m >= G0) check(gl[m] < 300, $sformatf("glitch residue %0d left at %0d", gl[m], m));
              last_i[1] = xi[1][m]; last_q[1] = xq[1][m];
            end
            prev_flag = out.glitch;
          end
        end
      end
      pend = in.valid;
      if (in.valid) begin
        pend_t = int'(in.tone);
        smp[pend_t]++;
      end
    end
  end

  initial begin
    for (int n = 0; n < NS; n++) begin
      gl[n] = (n >= G0) ? int'($floor(6000.0 * $exp(-real'(n - G0) / 3.0))) : 0;
      for (int t = 0; t < NT; t++) begin
        xi[t][n] = base_i[t] + int'($urandom_range(6)) - 3;
        xq[t][n] = base_q[t] + int'($urandom_range(6)) - 3;
      end
      xi[1][n] += gl[n];
      xq[1][n] += gl[n] / 2;
    end
    repeat (3) @(posedge clk);
    rst = 1'b0;
    wr(REG_GL_TPL + 0, 32'h4000);
    wr(REG_GL_TPL + 1, 32'h4000);
    wr(REG_GL_TPL + 2, 32'hFFFF_C000);
    wr(REG_GL_TPL + 3, 32'hFFFF_C000);
    wr(REG_GL_THR, 32'd1000);
    wr(REG_GL_HOLD, 32'd4);
    for (int n = 0; n < NS; n++)
      for (int c = 0; c < 3; c++) begin
        @(negedge clk);
        if (c < NT) in = '{valid: 1'b1, tone: TONE_W'(c), glitch: 1'b0,
                           i: TOD_W'(xi[c][n]), q: TOD_W'(xq[c][n])};
        else in = '0;
      end
    @(negedge clk); in = '0;
    repeat (3) @(posedge clk);
    check(runs == 1, $sformatf("flagged runs %0d", runs));
    check(first_flag >= 0 && first_flag <= G0, $sformatf("first flagged sample %0d", first_flag));
    check(last_flag > G0 + 3, $sformatf("last flagged sample %0d", last_flag));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
