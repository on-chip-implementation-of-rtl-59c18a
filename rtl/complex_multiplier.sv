// complex_multiplier -- multiplier-less product of a complex sample with a
// fixed complex twiddle W = WR + j*WI.
//
// Four digit-slicing constant multipliers (dsscm) form |Wr|*Br, |Wi|*Bi,
// |Wi|*Br and |Wr|*Bi; one Kogge-Stone adder per component then combines them
// into the real part Br*Wr - Bi*Wi and the imaginary part Br*Wi + Bi*Wr, the
// structure of a conventional complex multiplier (four real multipliers, one
// real subtractor, one real adder) with each multiplier replaced by table
// lookups.
//
// Because the tables hold products with |W|, the signs of WR and WI select, at
// elaboration, whether each component adds or subtracts and which product is
// the minuend. In the two sign combinations where both terms of a component
// are negative (re when WR < 0 <= WI, im when WR < 0 and WI < 0) the adder
// delivers the magnitude sum, i.e. the negated component; ds_pkg::cm_neg_re
// and cm_neg_im name those cases and the butterfly compensates by swapping its
// addition and subtraction. So m = s * (W*B) per component, with s = -1 exactly
// where cm_neg_* is true.
//
// WR, WI are in units of 2^-15, -32768..32768. Defaults 0x5A82 and 0x045A are
// the twiddle of the butterfly waveform of the original design. The outputs
// are 17 bits (range -2..2). Timing: three register stages (two inside each
// dsscm, one after the adders); a new B every clock.
module complex_multiplier
  import ds_pkg::*;
#(
  parameter int signed WR = 23170,
  parameter int signed WI = 1114
) (
  input  logic       clk,
  input  logic       rst,
  input  cplx_t      b,
  output cplx_wide_t m
);

  localparam int unsigned WR_MAG = abs_w(WR);
  localparam int unsigned WI_MAG = abs_w(WI);

  // Real part: subtract when WR and WI have the same sign; the minuend is
  // |Wr|Br unless WR is negative.
  localparam bit RE_SUB  = ((WR < 0) == (WI < 0));
  localparam bit RE_SWAP = (WR < 0);
  // Imaginary part: subtract when the signs differ; the minuend is |Wi|Br
  // unless WI is negative.
  localparam bit IM_SUB  = ((WR < 0) != (WI < 0));
  localparam bit IM_SWAP = (WI < 0);

  sample_t p_rr, p_ii, p_ri, p_ir;  // |Wr|Br, |Wi|Bi, |Wi|Br, |Wr|Bi

  dsscm #(.W_MAG(WR_MAG)) u_m_rr (.clk, .rst, .b(b.re), .p(p_rr));
  dsscm #(.W_MAG(WI_MAG)) u_m_ii (.clk, .rst, .b(b.im), .p(p_ii));
  dsscm #(.W_MAG(WI_MAG)) u_m_ri (.clk, .rst, .b(b.re), .p(p_ri));
  dsscm #(.W_MAG(WR_MAG)) u_m_ir (.clk, .rst, .b(b.im), .p(p_ir));

  wide_t re_a, re_b, im_a, im_b, re_s, im_s;
  logic  re_c, im_c;  // carries out, unused: 17 bits hold the result

  always_comb begin
    re_a = RE_SWAP ? wide_t'(p_ii) : wide_t'(p_rr);
    re_b = RE_SWAP ? wide_t'(p_rr) : wide_t'(p_ii);
    if (RE_SUB) re_b = ~re_b;
    im_a = IM_SWAP ? wide_t'(p_ir) : wide_t'(p_ri);
    im_b = IM_SWAP ? wide_t'(p_ri) : wide_t'(p_ir);
    if (IM_SUB) im_b = ~im_b;
  end

  kogge_stone_adder #(.W(DATA_W + 1)) u_add_re (
    .a(re_a), .b(re_b), .cin(RE_SUB), .sum(re_s), .cout(re_c));
  kogge_stone_adder #(.W(DATA_W + 1)) u_add_im (
    .a(im_a), .b(im_b), .cin(IM_SUB), .sum(im_s), .cout(im_c));

  always_ff @(posedge clk or posedge rst) begin
    if (rst) m <= '0;
    else begin
      m.re <= re_s;
      m.im <= im_s;
    end
  end

  initial begin
    assert (WR >= -W_ONE && WR <= W_ONE) else $error("complex_multiplier: WR out of range");
    assert (WI >= -W_ONE && WI <= W_ONE) else $error("complex_multiplier: WI out of range");
  end

endmodule
