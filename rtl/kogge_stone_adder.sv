// kogge_stone_adder -- parallel-prefix Ling adder with a Kogge-Stone prefix
// tree, sum = a + b + cin.
//
// Every addition and subtraction of the butterfly goes through this adder
// (a subtraction is a + ~b with cin = 1). It computes Ling pseudo-carries
// instead of carries. With bit generate g = a & b, transmit t = a | b and
// half-sum p = a ^ b, the carry out of bit i is c_i = t_i & H_i, where the
// pseudo-carry obeys
//   H_i = g_i | t_(i-1) & H_(i-1),   H_0 = g_0 | cin.
// This is a prefix problem over the pairs (g_i, t_(i-1)). It is solved by a
// Kogge-Stone network: ceil(log2 W) levels in which element i merges with
// element i - 2^l,
//   G = G_i | T_i & G_(i-2^l),   T = T_i & T_(i-2^l).
// H needs one AND less per bit than the true carry, which is the point of the
// Ling form. The carry is restored only where it is used:
//   sum_i = p_i ^ (t_(i-1) & H_(i-1)),  sum_0 = p_0 ^ cin,
//   cout  = t_(W-1) & H_(W-1).
// The depth is log2 W operator levels, and the fan-out is at most two.
//
// The adder is purely combinational; the caller registers the result. The
// default width of 16 bits matches the 16-bit adder instances of the
// multiplier. W must be at least 2.
module kogge_stone_adder #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);

  localparam int unsigned LEVELS = $clog2(W);

  logic [W-1:0] p, t, g0, t0;
  logic [W-1:0] h;      // Ling pseudo-carries H_i
  logic [W-1:0] carry;  // carry[i]: carry out of bit i

  always_comb begin
    p  = a ^ b;
    t  = a | b;
    // prefix elements: (g_i, t_(i-1)); element 0 absorbs the carry-in
    g0    = a & b;
    g0[0] = (a[0] & b[0]) | cin;
    t0    = {t[W-2:0], 1'b0};
  end

  // One block per prefix level; each level reads the previous level's
  // group generate/transmit vectors.
  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int unsigned D = 1 << l;
    logic [W-1:0] gi, ti, go, to;
    if (l == 0) begin : g_first
      assign gi = g0;
      assign ti = t0;
    end else begin : g_next
      assign gi = g_level[l-1].go;
      assign ti = g_level[l-1].to;
    end
    for (genvar i = 0; i < W; i++) begin : g_bit
      if (i >= D) begin : g_merge
        assign go[i] = gi[i] | (ti[i] & gi[i-D]);
        assign to[i] = ti[i] & ti[i-D];
      end else begin : g_pass
        assign go[i] = gi[i];
        assign to[i] = ti[i];
      end
    end
  end

  assign h     = g_level[LEVELS-1].go;
  assign carry = t & h;
  assign sum   = p ^ {carry[W-2:0], cin};
  assign cout  = carry[W-1];

endmodule
