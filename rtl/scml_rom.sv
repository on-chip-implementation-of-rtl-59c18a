// scml_rom -- one lookup table of the digit-slicing single constant multiplier.
//
// Table K holds, for each of the 16 values of a 4-bit input slice, the product
// of that slice with the fixed constant, already scaled to the slice's weight
// 2^(4K) and to the 2^-15 output format:
//   q = floor(d * W_MAG * 2^(4K) / 2^15 + 1/2)
// (d is the slice value, signed -8..7 for the top slice K = 3, else 0..15).
// Four such tables, ROM1..ROM4 of the multiplier, replace the multiplier.
// The output widths are 4, 8, 12 and 16 bits for K = 0..3, as printed for
// ROM1..ROM4; tables 0..2 are unsigned and table 3 is signed. W_MAG is the
// magnitude of the constant (0..32768, 32768 = 1.0); its sign is applied by
// the adders downstream.
//
// The table contents are computed at elaboration from W_MAG (the tables were
// generated by a separate program in the original flow). The output is
// registered, with an asynchronous active-high reset that clears it: one
// clock of latency, the first pipeline stage of the multiplier.
module scml_rom
  import ds_pkg::*;
#(
  parameter int unsigned K     = 0,
  parameter int unsigned W_MAG = 23170,
  localparam int unsigned OW   = P_BITS * (K + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  slice_t        addr,
  output logic [OW-1:0] q
);

  typedef logic [OW-1:0] table_t [1 << P_BITS];

  function automatic table_t build_table();
    table_t t;
    for (int unsigned d = 0; d < (1 << P_BITS); d++)
      t[d] = OW'(rom_entry(K, d, W_MAG));
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  always_ff @(posedge clk or posedge rst) begin
    if (rst) q <= '0;
    else     q <= TABLE[addr];
  end

  initial begin
    assert (K < B_SLICES) else $error("scml_rom: K out of range");
    assert (W_MAG <= W_ONE) else $error("scml_rom: W_MAG above 1.0");
  end

endmodule
