// dsscm -- digit-slicing single constant multiplier-less (DSSCM) multiplier.
//
// Computes p = b * W_MAG * 2^-15 for a fixed constant without a multiplier.
// The 16-bit input b is cut into four 4-bit slices b = sum_k 2^(4k) b_k
// (b_3 signed). Slice k addresses lookup table k (scml_rom), which returns
// b_k * W_MAG already weighted by 2^(4k) and scaled to the output LSB, in
// 4, 8, 12 and 16 bits. The four table outputs are summed by a tree of three
// 16-bit Kogge-Stone adders: (ROM1 + ROM2) and (ROM3 + ROM4) in parallel,
// then their sum. Because every table entry is rounded on its own, p differs
// from the exact product b * W_MAG / 2^15 by at most 2 LSB.
//
// W_MAG is the magnitude of the constant, 0..32768 (32768 = 1.0); the
// default 23170 (0x5A82, 0.7071) is the constant of the worked multiplier
// example and of the waveform of the original design. The sum always fits 16
// bits, because each table is bounded by its share of |b| * 1.0.
//
// Timing: two register stages, one at the table outputs and one after the
// adder tree; p belongs to the b presented two rising clock edges earlier, and
// a new b is accepted every clock. Asynchronous active-high reset clears both
// stages.
module dsscm
  import ds_pkg::*;
#(
  parameter int unsigned W_MAG = 23170
) (
  input  logic    clk,
  input  logic    rst,
  input  sample_t b,
  output sample_t p
);

  logic [3:0]  r0;   // ROM1
  logic [7:0]  r1;   // ROM2
  logic [11:0] r2;   // ROM3
  logic [15:0] r3;   // ROM4 (signed)

  scml_rom #(.K(0), .W_MAG(W_MAG)) u_rom1 (.clk, .rst, .addr(b[3:0]),   .q(r0));
  scml_rom #(.K(1), .W_MAG(W_MAG)) u_rom2 (.clk, .rst, .addr(b[7:4]),   .q(r1));
  scml_rom #(.K(2), .W_MAG(W_MAG)) u_rom3 (.clk, .rst, .addr(b[11:8]),  .q(r2));
  scml_rom #(.K(3), .W_MAG(W_MAG)) u_rom4 (.clk, .rst, .addr(b[15:12]), .q(r3));

  logic [DATA_W-1:0] s01, s23, s;
  logic              c01, c23, cs;  // carries out, unused: the sum is exact in 16 bits

  kogge_stone_adder #(.W(DATA_W)) u_add01 (
    .a({12'd0, r0}), .b({8'd0, r1}), .cin(1'b0), .sum(s01), .cout(c01));
  kogge_stone_adder #(.W(DATA_W)) u_add23 (
    .a({4'd0, r2}), .b(r3), .cin(1'b0), .sum(s23), .cout(c23));
  kogge_stone_adder #(.W(DATA_W)) u_add (
    .a(s01), .b(s23), .cin(1'b0), .sum(s), .cout(cs));

  always_ff @(posedge clk or posedge rst) begin
    if (rst) p <= '0;
    else     p <= sample_t'(s);
  end

  initial assert (W_MAG <= W_ONE) else $error("dsscm: W_MAG above 1.0");

endmodule
