// ds_butterfly -- pipelined radix-2 decimation-in-time FFT butterfly with a
// digit-slicing, multiplier-less twiddle multiplication.
//
//   X = A + W*B,   Y = A - W*B,   W = WR + j*WI fixed at elaboration.
//
// B goes through the complex multiplier (four digit-slicing constant
// multipliers built from lookup tables and Kogge-Stone adders, then one real
// adder/subtractor per component). A goes through a delay unit of the same
// depth. A complex adder forms X and a complex subtractor forms Y; where the
// complex multiplier hands over a negated component (ds_pkg::cm_neg_re/_im)
// the two swap their operation for that component, so the outputs are always
// A +- W*B.
//
// Format: all samples are Q1.15 (16-bit two's complement, |x| < 1). WR and WI
// are in units of 2^-15, -32768..32768; the defaults 0x5A82 (0.7071) and
// 0x045A (0.0340) are the twiddle used in the waveform of the original design.
// X and Y saturate at the 16-bit range; sat_x / sat_y flag a clamped output.
// The twiddle product itself is accurate to a few LSB (each table entry is
// rounded separately).
//
// Timing: fully pipelined, one butterfly per clock, latency BF_LATENCY = 4
// clocks (table register, adder tree register, complex multiplier register,
// output register). Asynchronous active-high reset clears every stage.
//
// The block structure (delay unit, complex multiplier, complex adder and
// subtractor) and the multiplier-less tables follow the original design; the
// twiddle convention W = Wr + jWi is the one its multiplier diagram and
// waveform use. The number of pipeline stages after the constant multiplier,
// the sign handling, the clamping and the reset are this design's choices.
module ds_butterfly
  import ds_pkg::*;
#(
  parameter int signed WR = 23170,
  parameter int signed WI = 1114
) (
  input  logic  clk,
  input  logic  rst,
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t x,
  output cplx_t y,
  output logic  sat_x,
  output logic  sat_y
);

  localparam bit NEG_RE = cm_neg_re(WR, WI);
  localparam bit NEG_IM = cm_neg_im(WR, WI);

  cplx_t      a_d;
  cplx_wide_t wb;

  delay_unit #(.WIDTH(2 * DATA_W), .DEPTH(CM_LATENCY)) u_delay (
    .clk, .rst, .d(a), .q(a_d));

  complex_multiplier #(.WR(WR), .WI(WI)) u_cmul (
    .clk, .rst, .b, .m(wb));

  // X = A + WB: add, unless that component of wb arrives negated.
  complex_addsub #(.SUB_RE(NEG_RE), .SUB_IM(NEG_IM)) u_cadd (
    .clk, .rst, .a(a_d), .m(wb), .y(x), .sat(sat_x));

  // Y = A - WB: subtract, unless that component of wb arrives negated.
  complex_addsub #(.SUB_RE(!NEG_RE), .SUB_IM(!NEG_IM)) u_csub (
    .clk, .rst, .a(a_d), .m(wb), .y(y), .sat(sat_y));

endmodule
