// tb_tod_accumulator: self-checking test of the TOD accumulator.
//
// Four tones, ACC_LEN = 5, ACC_SHIFT = 1. Random DDC samples are sent in
// tone sweeps, one sweep per 8 clocks, for 40 sweeps. Each tone must produce
// exactly one record per 5 sweeps, on the last sweep of each group, holding
// (sum of the 5 samples) >>> 1, one clock after its last sample.
module tb_tod_accumulator;
  import kid_pkg::*;
  localparam int NT = 4, ACC = 5, SWEEPS = 40;

  logic clk = 1'b0, rst = 1'b1;
  tone_smp_t in = '0;
  tod_t out;
  always #1 clk = ~clk;

  tod_accumulator #(.NTONES(NT), .ACC_LEN(ACC), .ACC_SHIFT(1)) dut (.clk, .rst, .in, .out);

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

  longint si [NT], sq [NT];
  int sweep = -1, records = 0;
  bit  exp_v = 1'b0;
  int  exp_t;
  longint exp_i, exp_q;

  always @(posedge clk) begin
    if (!rst) begin
      check(out.valid == exp_v, $sformatf("record timing at sweep %0d", sweep));
      if (exp_v && out.valid) begin
        check(int'(out.tone) == exp_t && longint'(out.i) == exp_i && longint'(out.q) == exp_q,
              $sformatf("tone %0d got (%0d,%0d) want (%0d,%0d)", out.tone, out.i, out.q, exp_i, exp_q));
        records++;
      end
      exp_v = 1'b0;
      if (in.valid) begin
        int t;
        t = int'(in.tone);
        if (t == 0) sweep++;
        if (sweep % ACC == 0) begin si[t] = 0; sq[t] = 0; end
        si[t] += longint'(in.d.re);
        sq[t] += longint'(in.d.im);
        if (sweep % ACC == ACC - 1) begin
          exp_v = 1'b1; exp_t = t; exp_i = si[t] >>> 1; exp_q = sq[t] >>> 1;
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int s = 0; s < SWEEPS; s++)
      for (int c = 0; c < 8; c++) begin
        @(negedge clk);
        if (c < NT)
          in = '{valid: 1'b1, tone: TONE_W'(c),
                 d: '{re: BIN_W'(int'($urandom_range(16000000)) - 8000000),
                      im: BIN_W'(int'($urandom_range(16000000)) - 8000000)}};
        else in = '0;
      end
    @(negedge clk); in = '0;
    repeat (3) @(posedge clk);
    check(records == NT * SWEEPS / ACC, $sformatf("records %0d", records));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
