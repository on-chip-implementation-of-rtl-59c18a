// tb_dsscm -- checks the digit-slicing constant multiplier.
//
// * the four input/output pairs of the original design's multiplier waveform
//   (constant 0x5A82): 1333->0D94, 828F->A74C, 6148->44CC, FB85->FCD6, each
//   within 2 LSB (the original tables were rounded slightly differently);
// * the worked example 0.65 x 0.7071 = 0.4597 (within 2e-4);
// * bit-exact agreement with the per-table rounded product, and agreement
//   within 2 LSB of the exact product, on random and extreme inputs for the
//   constants 0.7071, 1.0 and 0.034;
// * latency of exactly two clocks at one input per clock, and reset.
module tb_dsscm;
  import ds_ref_pkg::*;

  localparam int NW = 3;
  localparam int WS [NW] = '{23170, 32768, 1114};

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  logic signed [15:0] b;
  logic signed [15:0] p [NW];
  int hist [$];

  for (genvar i = 0; i < NW; i++) begin : g_m
    dsscm #(.W_MAG(WS[i])) u (.clk, .rst, .b, .p(p[i]));
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

  int fig_in  [4] = '{'h1333, 'h828F, 'h6148, 'hFB85};
  int fig_out [4] = '{'h0D94, 'hA74C, 'h44CC, 'hFCD6};

  initial begin
    b = 16'h7FFF;
    repeat (2) @(posedge clk);
    #1;
    check("reset", int'(p[0]), 0, 0);
    rst = 1'b0;
    // latency: apply one value, then zero; result must appear after exactly two edges
    b = 16'h1333;
    @(posedge clk); #1;
    b = 16'h0000;
    check("latency: not after 1 clock", int'(p[0]), 0, 0);
    @(posedge clk); #1;
    check("latency: after 2 clocks", int'(p[0]), dsscm_ref('h1333, 23170), 0);
    @(posedge clk); #1;
    // streaming: one new input every clock
    for (int n = 0; n < 3000; n++) begin
      int v;
      if (n < 4)        v = s16(fig_in[n]);
      else if (n == 4)  v = 21299;   // 0.65
      else if (n == 5)  v = -32768;
      else if (n == 6)  v = 32767;
      else              v = s16(int'($urandom));
      b = 16'(v);
      hist.push_front(v);
      @(posedge clk); #1;
      if (hist.size() > 1) begin
        int bv;
        bv = hist[1];
        for (int i = 0; i < NW; i++) begin
          check($sformatf("bit-exact w=%0d b=%0d", WS[i], bv), int'(p[i]), dsscm_ref(bv, WS[i]), 0);
          check($sformatf("accuracy w=%0d b=%0d", WS[i], bv), int'(p[i]),
                int'((longint'(bv) * WS[i]) >>> 15), 2);
        end
        if (n - 1 < 4)
          check($sformatf("waveform pair %0d", n - 1), int'(p[0]), s16(fig_out[n - 1]), 2);
        if (n - 1 == 4) begin
          checks++;
          if (real'(p[0]) / 32768.0 - 0.4597 > 2.0e-4 || 0.4597 - real'(p[0]) / 32768.0 > 2.0e-4) begin
            failures++;
            $display("FAIL 0.65*0.7071 = %f", real'(p[0]) / 32768.0);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
