// tb_fft8 -- the butterfly used as intended: an 8-point radix-2
// decimation-in-time FFT made of 12 ds_butterfly instances in three stages
// (inputs in bit-reversed order; stage 1 uses W8^0, stage 2 W8^0 and W8^2,
// stage 3 W8^0..W8^3, with W8^k = e^(-j*2*pi*k/8)). Every butterfly position
// has its own fixed twiddle, which is what makes the constant-table
// multiplier applicable. A new 8-sample frame enters every clock; the spectrum
// leaves 3 x 4 = 12 clocks later.
//
// Input components are below 2896 (complex magnitude below 1/8), so the
// spectrum (gain up to 8) cannot clamp. Each output bin is compared with a
// double-precision DFT of the same frame, within 16 LSB (each butterfly adds
// at most a few LSB of table rounding; the largest error seen is printed).
// An impulse frame checks the 12-clock latency. The twiddles include +1.0
// (W8^0), -j (W8^2) and W8^3, whose imaginary product arrives negated.
module tb_fft8;
  import ds_ref_pkg::*;

  localparam int LAT = 12;
  localparam int N = 8;
  localparam real PI = 3.14159265358979323846;

  // twiddle W8^k in units of 2^-15
  localparam int TWR [4] = '{32768,  23170,      0, -23170};
  localparam int TWI [4] = '{    0, -23170, -32768, -23170};

  int checks = 0, failures = 0, frames = 0;
  real max_err = 0.0;
  logic clk = 1'b0, rst = 1'b1;
  ds_pkg::cplx_t xin [N];
  ds_pkg::cplx_t s0 [N], s1 [N], s2 [N], s3 [N];
  logic unused_sat [3][N];

  localparam int BITREV [N] = '{0, 4, 2, 6, 1, 5, 3, 7};

  for (genvar i = 0; i < N; i++) begin : g_in
    assign s0[i] = xin[BITREV[i]];
  end

  // stage 1: pairs (2m, 2m+1), twiddle W8^0
  for (genvar m = 0; m < 4; m++) begin : g_st1
    ds_butterfly #(.WR(TWR[0]), .WI(TWI[0])) u (
      .clk, .rst, .a(s0[2*m]), .b(s0[2*m+1]), .x(s1[2*m]), .y(s1[2*m+1]),
      .sat_x(unused_sat[0][2*m]), .sat_y(unused_sat[0][2*m+1]));
  end
  // stage 2: pairs (g+j, g+j+2), twiddle W8^(2j)
  for (genvar g = 0; g < 8; g += 4) begin : g_st2
    for (genvar j = 0; j < 2; j++) begin : g_j
      ds_butterfly #(.WR(TWR[2*j]), .WI(TWI[2*j])) u (
        .clk, .rst, .a(s1[g+j]), .b(s1[g+j+2]), .x(s2[g+j]), .y(s2[g+j+2]),
        .sat_x(unused_sat[1][g+j]), .sat_y(unused_sat[1][g+j+2]));
    end
  end
  // stage 3: pairs (j, j+4), twiddle W8^j
  for (genvar j = 0; j < 4; j++) begin : g_st3
    ds_butterfly #(.WR(TWR[j]), .WI(TWI[j])) u (
      .clk, .rst, .a(s2[j]), .b(s2[j+4]), .x(s3[j]), .y(s3[j+4]),
      .sat_x(unused_sat[2][j]), .sat_y(unused_sat[2][j+4]));
  end

  always #5 clk = ~clk;

  initial begin
    #500000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hre [$][N];
  int him [$][N];

  task automatic check_bin(int k, int got_re, int got_im, int fr [N], int fi [N]);
    real er, ei, d;
    er = 0.0; ei = 0.0;
    for (int n = 0; n < N; n++) begin
      er += fr[n] * $cos(2.0 * PI * k * n / N) + fi[n] * $sin(2.0 * PI * k * n / N);
      ei += fi[n] * $cos(2.0 * PI * k * n / N) - fr[n] * $sin(2.0 * PI * k * n / N);
    end
    for (int c = 0; c < 2; c++) begin
      d = (c == 0) ? real'(got_re) - er : real'(got_im) - ei;
      if (d < 0.0) d = -d;
      if (d > max_err) max_err = d;
      checks++;
      if (d > 16.0) begin
        failures++;
        if (failures < 10) $display("FAIL bin %0d: got (%0d, %0d) expected (%f, %f)", k, got_re, got_im, er, ei);
      end
    end
  endtask

  initial begin
    int impulse_seen;
    impulse_seen = 0;
    for (int i = 0; i < N; i++) xin[i] = '0;
    repeat (2) @(posedge clk);
    #1;
    rst = 1'b0;
    // latency: a single impulse frame x = [4096, 0, ...] -> flat spectrum 4096
    xin[0].re = 16'sd4096;
    @(posedge clk); #1;
    xin[0] = '0;
    for (int c = 1; c < LAT; c++) begin
      checks++;
      if (s3[3].re != 0) failures++;
      @(posedge clk); #1;
    end
    for (int k = 0; k < N; k++) begin
      checks++;
      if (s3[k].re < 4096 - 4 || s3[k].re > 4096 + 4 || s3[k].im < -4 || s3[k].im > 4) failures++;
      else impulse_seen++;
    end
    // stream of random frames, one per clock
    for (int f = 0; f < 600; f++) begin
      int fr [N], fi [N];
      for (int n = 0; n < N; n++) begin
        fr[n] = int'($urandom_range(0, 5790)) - 2895;
        fi[n] = int'($urandom_range(0, 5790)) - 2895;
        if (f % 50 == 7) begin fr[n] = 2895; fi[n] = (n % 2 == 0) ? 2895 : -2895; end
        xin[n].re = 16'(fr[n]);
        xin[n].im = 16'(fi[n]);
      end
      hre.push_front(fr);
      him.push_front(fi);
      @(posedge clk); #1;
      if (hre.size() >= LAT) begin
        frames++;
        for (int k = 0; k < N; k++)
          check_bin(k, int'(s3[k].re), int'(s3[k].im), hre[LAT-1], him[LAT-1]);
      end
    end
    $display("frames checked %0d, largest bin error %f LSB, impulse bins ok %0d", frames, max_err, impulse_seen);
    checks++;
    if (frames == 0 || impulse_seen != N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
