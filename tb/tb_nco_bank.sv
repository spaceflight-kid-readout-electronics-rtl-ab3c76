// tb_nco_bank: self-checking test of the NCO bank.
//
// Eight tones with different tuning words and start phases are swept once
// per 16-clock frame for 40 frames. A reference model keeps its own 16-bit
// phase per tone and computes cos/sin with $cos/$sin at the 10-bit phase the
// bank uses; every output must agree within one LSB, come in tone order, and
// start exactly two clocks after the frame tick. A clear-phase write in the
// middle must restart all phases from zero.
module tb_nco_bank;
  import kid_pkg::*;
  localparam int NT = 8;
  localparam int P  = 16;

  logic clk = 1'b0, rst = 1'b1, tick = 1'b0;
  cfg_wr_t cfg = '0;
  nco_t out;
  always #1 clk = ~clk;

  nco_bank #(.NTONES(NT)) dut (.clk, .rst, .cfg, .frame_tick(tick), .out);

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
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] ftw [NT], ofs [NT], ph [NT];
  int tick_cycle, cycle = 0, next_tone = 0;
  bit clear_pending = 1'b0, clear_active = 1'b0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic int expect_trig(input logic [15:0] p, input bit want_sin);
    real a;
    a = 2.0 * 3.14159265358979 * real'(p[15:6]) / 1024.0;
    return want_sin ? int'($floor(32767.0 * $sin(a) + 0.5)) : int'($floor(32767.0 * $cos(a) + 0.5));
  endfunction

  // reference model and comparison
  always @(posedge clk) begin
    if (!rst && out.valid) begin
      int t, ec, es;
      logic [15:0] p;
      t = int'(out.tone);
      check(t == next_tone, $sformatf("tone order: got %0d want %0d", t, next_tone));
      if (t == 0) begin
        check(cycle - tick_cycle == 2, $sformatf("sweep start %0d clocks after tick", cycle - tick_cycle));
        clear_active = clear_pending;
        clear_pending = 1'b0;
      end
      if (clear_active) ph[t] = 16'd0;
      p  = ph[t] + ofs[t];
      ec = expect_trig(p, 1'b0);
      es = expect_trig(p, 1'b1);
      check(int'(out.c) - ec <= 1 && ec - int'(out.c) <= 1, $sformatf("cos tone %0d got %0d want %0d", t, out.c, ec));
      check(int'(out.s) - es <= 1 && es - int'(out.s) <= 1, $sformatf("sin tone %0d got %0d want %0d", t, out.s, es));
      ph[t] = ph[t] + ftw[t];
      next_tone = (t + 1) % NT;
    end
  end

  int sweeps = 0;
  initial begin
    for (int t = 0; t < NT; t++) begin
      ftw[t] = 16'($urandom);
      ofs[t] = 16'($urandom);
      ph[t]  = 16'd0;
    end
    ftw[0] = 16'd0;
    ftw[1] = 16'h8000;   // half a turn per frame
    ftw[2] = 16'hFFC0;   // small negative offset
    repeat (3) @(posedge clk);
    rst = 1'b0;
    clear_pending = 1'b1;   // reset requests a clear
    for (int t = 0; t < NT; t++) begin
      wr(REG_FTW + 16'(t), 32'(ftw[t]));
      wr(REG_PHOFS + 16'(t), 32'(ofs[t]));
    end
    for (int f = 0; f < 40; f++) begin
      if (f == 20) begin
        wr(REG_NCO_CLR, 32'd1);
        clear_pending = 1'b1;
      end
      @(negedge clk); tick = 1'b1; tick_cycle = cycle;
      @(negedge clk); tick = 1'b0;
      repeat (P - 2) @(negedge clk);
      sweeps++;
    end
    repeat (20) @(posedge clk);
    check(checks > 40 * NT * 2, "all sweeps produced output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
