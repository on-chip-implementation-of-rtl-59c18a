// complex_addsub -- complex adder / subtractor of the butterfly, y = a +- m,
// with saturation to 16 bits.
//
// Two real Kogge-Stone adders, one per component, each 18 bits wide so that
// a 16-bit sample plus a 17-bit twiddle product cannot wrap. SUB_RE and SUB_IM
// choose subtraction (a + ~m + 1) per component at elaboration; the butterfly
// builds its X = A + WB output from one instance and its Y = A - WB output
// from another, with the choice per component flipped where the complex
// multiplier delivers a negated component.
//
// The 18-bit results are clamped to the 16-bit sample range [-32768, 32767]
// and registered; sat is registered with them and is high when either
// component was clamped. The add/subtract structure follows the original
// block diagram; clamping and the sat flag are this design's choice, since the
// source only states that X and Y keep the 16-bit sample format.
// Timing: one register stage. Asynchronous active-high reset clears the
// outputs.
module complex_addsub
  import ds_pkg::*;
#(
  parameter bit SUB_RE = 1'b0,
  parameter bit SUB_IM = 1'b0
) (
  input  logic       clk,
  input  logic       rst,
  input  cplx_t      a,
  input  cplx_wide_t m,
  output cplx_t      y,
  output logic       sat
);

  localparam int unsigned SW = DATA_W + 2;
  typedef logic signed [SW-1:0] sum_t;

  localparam sum_t MAX_S = sum_t'((1 << (DATA_W - 1)) - 1);
  localparam sum_t MIN_S = -sum_t'(1 << (DATA_W - 1));

  sum_t a_re, a_im, b_re, b_im, s_re, s_im;
  logic c_re, c_im;  // carries out, unused: 18 bits hold the result

  always_comb begin
    a_re = sum_t'(a.re);
    a_im = sum_t'(a.im);
    b_re = SUB_RE ? ~sum_t'(m.re) : sum_t'(m.re);
    b_im = SUB_IM ? ~sum_t'(m.im) : sum_t'(m.im);
  end

  kogge_stone_adder #(.W(SW)) u_add_re (
    .a(a_re), .b(b_re), .cin(SUB_RE), .sum(s_re), .cout(c_re));
  kogge_stone_adder #(.W(SW)) u_add_im (
    .a(a_im), .b(b_im), .cin(SUB_IM), .sum(s_im), .cout(c_im));

  function automatic sample_t clamp(sum_t v);
    if (v > MAX_S) return sample_t'(MAX_S);
    if (v < MIN_S) return sample_t'(MIN_S);
    return sample_t'(v);
  endfunction

  function automatic bit clipped(sum_t v);
    return (v > MAX_S) || (v < MIN_S);
  endfunction

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      y   <= '0;
      sat <= 1'b0;
    end else begin
      y.re <= clamp(s_re);
      y.im <= clamp(s_im);
      sat  <= clipped(s_re) || clipped(s_im);
    end
  end

endmodule
