// tb_complex_addsub -- checks the complex adder/subtractor in its four
// add/subtract combinations: y = a +- m per component, clamped to 16 bits,
// the sat flag, the one-clock latency and reset. Operands include the
// extremes so that both positive and negative clamping occur.
module tb_complex_addsub;
  import ds_ref_pkg::*;

  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;
  logic clk = 1'b0, rst = 1'b1;
  ds_pkg::cplx_t a;
  ds_pkg::cplx_wide_t m;
  ds_pkg::cplx_t y [4];
  logic sat [4];

  for (genvar i = 0; i < 4; i++) begin : g_u
    complex_addsub #(.SUB_RE(i[0]), .SUB_IM(i[1])) u (.clk, .rst, .a, .m, .y(y[i]), .sat(sat[i]));
  end

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '1; m = '1;
    repeat (2) @(posedge clk);
    #1;
    check("reset", int'(y[3].re), 0);
    rst = 1'b0;
    for (int n = 0; n < 3000; n++) begin
      int ar, ai, mr, mi;
      ar = s16(int'($urandom));
      ai = s16(int'($urandom));
      mr = int'($urandom_range(0, 131071)) - 65536;
      mi = int'($urandom_range(0, 131071)) - 65536;
      if (n % 4 == 1) begin mr = mr / 4; mi = mi / 4; end
      if (n == 5) begin ar = -32768; mr = 65535;  end  // subtract clamps low
      if (n == 6) begin ar = 32767;  mr = -65536; end  // subtract clamps high
      a.re = 16'(ar); a.im = 16'(ai);
      m.re = 17'(mr); m.im = 17'(mi);
      @(posedge clk); #1;
      for (int i = 0; i < 4; i++) begin
        int er, ei;
        er = i[0] ? ar - mr : ar + mr;
        ei = i[1] ? ai - mi : ai + mi;
        if (er > 32767 || ei > 32767) sat_hi++;
        if (er < -32768 || ei < -32768) sat_lo++;
        check($sformatf("re %0d", i), int'(y[i].re), sat16(er));
        check($sformatf("im %0d", i), int'(y[i].im), sat16(ei));
        check($sformatf("sat %0d", i), int'(sat[i]), int'(er != sat16(er) || ei != sat16(ei)));
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
