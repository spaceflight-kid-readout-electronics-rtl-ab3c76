// tb_ddc: self-checking test of the digital down converter.
//
// Random bin samples and random NCO angles are applied for 500 clocks; each
// output must equal round((x * (cos - j sin)) / 2^15), computed here with
// real arithmetic from the same cos/sin words, one clock later and with the
// tone tag carried along. A constant phasor rotating with the NCO must come
// out as a constant.
module tb_ddc;
  import kid_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  tone_smp_t sel = '0, out;
  nco_t nco = '0;
  always #1 clk = ~clk;

  ddc dut (.clk, .rst, .sel, .nco, .out);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real pi2 = 2.0 * 3.14159265358979;
  real wre, wim;
  int  wtone;
  bit  pend = 1'b0;

  always @(posedge clk) begin
    if (pend) begin
      check(out.valid && int'(out.tone) == wtone, "valid/tone");
      check(int'(out.d.re) == int'($floor(wre + 0.5)) && int'(out.d.im) == int'($floor(wim + 0.5)),
            $sformatf("got (%0d,%0d) want (%f,%f)", out.d.re, out.d.im, wre, wim));
    end
    pend = sel.valid;
    wtone = int'(sel.tone);
    wre = (real'(sel.d.re) * real'(nco.c) + real'(sel.d.im) * real'(nco.s)) / 32768.0;
    wim = (real'(sel.d.im) * real'(nco.c) - real'(sel.d.re) * real'(nco.s)) / 32768.0;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int i = 0; i < 500; i++) begin
      real a;
      int t;
      @(negedge clk);
      t = $urandom_range(1023);
      a = pi2 * real'($urandom_range(1023)) / 1024.0;
      nco = '{valid: 1'b1, tone: TONE_W'(t), c: 16'(int'($floor(32767.0 * $cos(a)))),
              s: 16'(int'($floor(32767.0 * $sin(a))))};
      if (i < 250)
        sel = '{valid: 1'b1, tone: TONE_W'(t),
                d: '{re: BIN_W'(int'($urandom_range(2000000)) - 1000000),
                     im: BIN_W'(int'($urandom_range(2000000)) - 1000000)}};
      else begin
        // bin sample = 100000 * exp(j a): the DDC must return about (100000, 0)
        sel = '{valid: 1'b1, tone: TONE_W'(t),
                d: '{re: BIN_W'(int'($floor(100000.0 * $cos(a)))),
                     im: BIN_W'(int'($floor(100000.0 * $sin(a))))}};
        @(posedge clk); @(negedge clk);
        check(out.d.re > 99990 && out.d.re < 100010 && out.d.im > -10 && out.d.im < 10,
              $sformatf("derotation got (%0d,%0d)", out.d.re, out.d.im));
      end
    end
    @(negedge clk); sel = '0; nco = '0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
