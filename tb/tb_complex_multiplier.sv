// tb_complex_multiplier -- checks the multiplier-less complex multiplier for
// twiddles in all four sign quadrants and at +-1.0. For each it compares the
// output with the true product W*B built from per-table rounded products
// (bit-exact, after applying the documented sign of the negated-component
// cases) and with the exact product (within 4 LSB), at one input per clock
// and a latency of three clocks.
module tb_complex_multiplier;
  import ds_ref_pkg::*;

  localparam int NW = 7;
  localparam int WRS [NW] = '{23170,  23170, -23170, -23170, 32768,      0, -30274};
  localparam int WIS [NW] = '{ 1114, -23170,  23170, -23170,     0, -32768, -12540};

  int checks = 0, failures = 0;
  int neg_re_seen = 0, neg_im_seen = 0;
  logic clk = 1'b0, rst = 1'b1;
  ds_pkg::cplx_t b;
  ds_pkg::cplx_wide_t m [NW];
  int hr [$], hi [$];

  for (genvar i = 0; i < NW; i++) begin : g_m
    complex_multiplier #(.WR(WRS[i]), .WI(WIS[i])) u (.clk, .rst, .b, .m(m[i]));
  end

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp, int tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d (+-%0d)", what, got, exp, tol);
    end
  endtask

  initial begin
    #200000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    b = '1;
    repeat (2) @(posedge clk);
    #1;
    check("reset", int'(m[0].re), 0, 0);
    rst = 1'b0;
    for (int n = 0; n < 2000; n++) begin
      int vr, vi;
      vr = s16(int'($urandom));
      vi = s16(int'($urandom));
      if (n == 1) begin vr = -32768; vi = -32768; end
      if (n == 2) begin vr = 32767;  vi = -32768; end
      if (n == 3) begin vr = 'h2000; vi = s16('hF001); end
      b.re = 16'(vr);
      b.im = 16'(vi);
      hr.push_front(vr);
      hi.push_front(vi);
      @(posedge clk); #1;
      if (hr.size() > 2) begin
        int br, bi;
        br = hr[2];
        bi = hi[2];
        for (int i = 0; i < NW; i++) begin
          int sr, si, er, ei;
          // sign of the delivered component (negated-component cases)
          sr = (WRS[i] < 0 && WIS[i] >= 0) ? -1 : 1;
          si = (WRS[i] < 0 && WIS[i] < 0)  ? -1 : 1;
          if (sr < 0 && n == 5) neg_re_seen++;
          if (si < 0 && n == 5) neg_im_seen++;
          er = wb_re_ref(br, bi, WRS[i], WIS[i]);
          ei = wb_im_ref(br, bi, WRS[i], WIS[i]);
          check($sformatf("re w%0d", i), sr * int'(m[i].re), er, 0);
          check($sformatf("im w%0d", i), si * int'(m[i].im), ei, 0);
          check($sformatf("re exact w%0d", i), sr * int'(m[i].re), exact_re(br, bi, WRS[i], WIS[i]), 4);
          check($sformatf("im exact w%0d", i), si * int'(m[i].im), exact_im(br, bi, WRS[i], WIS[i]), 4);
        end
      end
    end
    checks++;
    if (neg_re_seen == 0 || neg_im_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
