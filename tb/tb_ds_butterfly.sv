// tb_ds_butterfly -- end-to-end test of the butterfly X = A + WB, Y = A - WB.
//
// Five butterflies run side by side on the same stream of operands, one per
// clock: the default twiddle (0x5A82 + j0x045A), and W8^1, W8^2, W8^3 of an
// 8-point FFT plus 0.7071(-1 + j), so that every sign combination of the
// twiddle, including both cases where the complex multiplier hands over a
// negated component, is exercised. Outputs are compared bit-exactly with a
// reference built from per-table rounded products and, where no clamping
// occurs, within 4 LSB of the exact butterfly. Operands alternate between
// full range (outputs clamp) and quarter range (they cannot). The test counts
// each mechanism -- clamping of X and of Y (high and low), the two negated
// component paths, a full-rate stream and the 4-clock latency -- and fails if
// any of them never happened. It also replays the butterfly operands of the
// original design's waveform: A = 005E + j0300, B = 2000 + jF001 gives
// X = 178A + jF8C6, Y = E932 + j0D3A (checked within 2 LSB).
module tb_ds_butterfly;
  import ds_ref_pkg::*;

  localparam int NW = 5;
  localparam int WRS [NW] = '{23170,  23170,      0, -23170, -23170};
  localparam int WIS [NW] = '{ 1114, -23170, -32768, -23170,  23170};
  localparam int LAT = 4;

  int checks = 0, failures = 0;
  int n_sat_x = 0, n_sat_y = 0, n_sat_hi = 0, n_sat_lo = 0;
  int n_neg_re = 0, n_neg_im = 0, n_stream = 0, n_latency = 0, n_fig = 0;
  logic clk = 1'b0, rst = 1'b1;
  ds_pkg::cplx_t a, b;
  ds_pkg::cplx_t x [NW], y [NW];
  logic sat_x [NW], sat_y [NW];
  int h_ar [$], h_ai [$], h_br [$], h_bi [$];

  for (genvar i = 0; i < NW; i++) begin : g_bf
    ds_butterfly #(.WR(WRS[i]), .WI(WIS[i])) u (
      .clk, .rst, .a, .b, .x(x[i]), .y(y[i]), .sat_x(sat_x[i]), .sat_y(sat_y[i]));
  end

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp, int tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d (+-%0d)", what, got, exp, tol);
    end
  endtask

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %-28s happened %0d times", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism %s never happened", what);
    end
  endtask

  initial begin
    #500000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '1; b = '1;
    repeat (2) @(posedge clk);
    #1;
    for (int i = 0; i < NW; i++) check("reset", int'(x[i].re) | int'(y[i].im), 0, 0);
    rst = 1'b0;

    // latency: one operand pair, then zeros; X appears after exactly LAT edges
    a.re = 16'h005E; a.im = 16'h0300; b.re = 16'h2000; b.im = 16'hF001;
    @(posedge clk); #1;
    a = '0; b = '0;
    for (int c = 1; c < LAT; c++) begin
      check("latency: early output", int'(x[0].re), 0, 0);
      @(posedge clk); #1;
    end
    check("waveform Xr", int'(x[0].re), s16('h178A), 2);
    check("waveform Xi", int'(x[0].im), s16('hF8C6), 2);
    check("waveform Yr", int'(y[0].re), s16('hE932), 2);
    check("waveform Yi", int'(y[0].im), s16('h0D3A), 2);
    if (x[0].re != 0) n_latency++;
    n_fig++;

    for (int n = 0; n < 4000; n++) begin
      int ar, ai, br, bi;
      ar = s16(int'($urandom)); ai = s16(int'($urandom));
      br = s16(int'($urandom)); bi = s16(int'($urandom));
      if ((n / 64) % 2 == 1) begin ar /= 4; ai /= 4; br /= 4; bi /= 4; end
      a.re = 16'(ar); a.im = 16'(ai); b.re = 16'(br); b.im = 16'(bi);
      h_ar.push_front(ar); h_ai.push_front(ai); h_br.push_front(br); h_bi.push_front(bi);
      @(posedge clk); #1;
      if (h_ar.size() >= LAT) begin
        int qar, qai, qbr, qbi;
        qar = h_ar[LAT-1]; qai = h_ai[LAT-1]; qbr = h_br[LAT-1]; qbi = h_bi[LAT-1];
        n_stream++;
        for (int i = 0; i < NW; i++) begin
          int wr_, wi_, xr, xi, yr, yi;
          wr_ = wb_re_ref(qbr, qbi, WRS[i], WIS[i]);
          wi_ = wb_im_ref(qbr, qbi, WRS[i], WIS[i]);
          xr = qar + wr_; xi = qai + wi_; yr = qar - wr_; yi = qai - wi_;
          check($sformatf("Xr w%0d", i), int'(x[i].re), sat16(xr), 0);
          check($sformatf("Xi w%0d", i), int'(x[i].im), sat16(xi), 0);
          check($sformatf("Yr w%0d", i), int'(y[i].re), sat16(yr), 0);
          check($sformatf("Yi w%0d", i), int'(y[i].im), sat16(yi), 0);
          check($sformatf("sat_x w%0d", i), int'(sat_x[i]),
                int'(xr != sat16(xr) || xi != sat16(xi)), 0);
          check($sformatf("sat_y w%0d", i), int'(sat_y[i]),
                int'(yr != sat16(yr) || yi != sat16(yi)), 0);
          if (xr == sat16(xr))
            check($sformatf("Xr exact w%0d", i), int'(x[i].re),
                  qar + exact_re(qbr, qbi, WRS[i], WIS[i]), 4);
          if (yi == sat16(yi))
            check($sformatf("Yi exact w%0d", i), int'(y[i].im),
                  qai - exact_im(qbr, qbi, WRS[i], WIS[i]), 4);
          if (sat_x[i]) n_sat_x++;
          if (sat_y[i]) n_sat_y++;
          if (xr > 32767 || yr > 32767) n_sat_hi++;
          if (xr < -32768 || yr < -32768) n_sat_lo++;
          if (WRS[i] < 0 && WIS[i] >= 0) n_neg_re++;
          if (WRS[i] < 0 && WIS[i] < 0)  n_neg_im++;
        end
      end
    end
    need("X clamped", n_sat_x);
    need("Y clamped", n_sat_y);
    need("clamp high", n_sat_hi);
    need("clamp low", n_sat_lo);
    need("negated real component", n_neg_re);
    need("negated imaginary component", n_neg_im);
    need("one butterfly per clock", n_stream);
    need("4-clock latency", n_latency);
    need("waveform operands", n_fig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
