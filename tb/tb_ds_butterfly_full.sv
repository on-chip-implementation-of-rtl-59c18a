// tb_ds_butterfly_full -- the butterfly exactly as delivered (all parameters
// at their defaults, twiddle 0x5A82 + j0x045A) taken through one complete
// operation: reset, the butterfly operands of the original design's waveform
// (A = 005E + j0300, B = 2000 + jF001 -> X = 178A + jF8C6, Y = E932 + j0D3A,
// within 2 LSB) with the 4-clock latency checked, then a stream of 2000
// random operand pairs at one per clock compared bit-exactly with the
// reference model, including clamped outputs.
module tb_ds_butterfly_full;
  import ds_ref_pkg::*;

  localparam int WR = 23170, WI = 1114, LAT = 4;

  int checks = 0, failures = 0, n_sat = 0;
  logic clk = 1'b0, rst = 1'b1;
  ds_pkg::cplx_t a, b, x, y;
  logic sat_x, sat_y;
  int h_ar [$], h_ai [$], h_br [$], h_bi [$];

  ds_butterfly dut (.clk, .rst, .a, .b, .x, .y, .sat_x, .sat_y);

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
    a = '1; b = '1;
    repeat (2) @(posedge clk);
    #1;
    check("reset", int'(x.re), 0, 0);
    rst = 1'b0;
    a.re = 16'h005E; a.im = 16'h0300; b.re = 16'h2000; b.im = 16'hF001;
    @(posedge clk); #1;
    a = '0; b = '0;
    for (int c = 1; c < LAT; c++) begin
      check("latency: early output", int'(x.re), 0, 0);
      @(posedge clk); #1;
    end
    check("waveform Xr", int'(x.re), s16('h178A), 2);
    check("waveform Xi", int'(x.im), s16('hF8C6), 2);
    check("waveform Yr", int'(y.re), s16('hE932), 2);
    check("waveform Yi", int'(y.im), s16('h0D3A), 2);
    for (int n = 0; n < 2000; n++) begin
      int ar, ai, br, bi;
      ar = s16(int'($urandom)); ai = s16(int'($urandom));
      br = s16(int'($urandom)); bi = s16(int'($urandom));
      a.re = 16'(ar); a.im = 16'(ai); b.re = 16'(br); b.im = 16'(bi);
      h_ar.push_front(ar); h_ai.push_front(ai); h_br.push_front(br); h_bi.push_front(bi);
      @(posedge clk); #1;
      if (h_ar.size() >= LAT) begin
        int wr_, wi_;
        wr_ = wb_re_ref(h_br[LAT-1], h_bi[LAT-1], WR, WI);
        wi_ = wb_im_ref(h_br[LAT-1], h_bi[LAT-1], WR, WI);
        check("Xr", int'(x.re), sat16(h_ar[LAT-1] + wr_), 0);
        check("Xi", int'(x.im), sat16(h_ai[LAT-1] + wi_), 0);
        check("Yr", int'(y.re), sat16(h_ar[LAT-1] - wr_), 0);
        check("Yi", int'(y.im), sat16(h_ai[LAT-1] - wi_), 0);
        if (sat_x || sat_y) n_sat++;
      end
    end
    checks++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
