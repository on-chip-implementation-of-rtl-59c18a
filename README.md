# Digit-sliced, multiplier-less radix-2 FFT butterfly

A radix-2 decimation-in-time FFT is built from one operation repeated
`(N/2)·log2 N` times, the butterfly

    X = A + W·B
    Y = A − W·B

where `A`, `B` are complex samples and `W` is a twiddle factor
`e^(−j2πk/N)`. The expensive part is the complex product `W·B`: four real
multiplications. In a pipelined FFT every butterfly position always uses the
same twiddle, so `W` is a constant that is known when the hardware is built.
This design uses that. It cuts the 16-bit operand into four 4-bit digits and
looks each digit up in a small table that already holds "digit × constant".
It then adds the four table outputs with fast parallel-prefix adders. No
multiplier is left in the datapath. Every stage is registered, so the circuit
takes one butterfly per clock.

The RTL follows the architecture described by Algnabi, Teymourzadeh, Othman,
Islam and Hong ("On-Chip Implementation of Pipeline Digit-Slicing
Multiplier-Less Butterfly for Fast Fourier Transform Architecture"). Their
description stops short of several details: rounding, signs, overflow, reset
and pipeline depth. Those choices are this design's own, and they are marked
as such below and in each file's header.

## Number format and digit slicing

All samples are 16-bit two's complement fractions (Q1.15, value = integer /
2^15, range [−1, 1)). A sample `b` is read as four 4-bit digits:

    b = ( b0 + 16·b1 + 256·b2 + 4096·b3 ) · 2^-15

`b0`, `b1` and `b2` are unsigned (0…15). The top digit `b3` holds the sign bit,
so it is signed (−8…7). For example, `0xAC` read as an 8-bit, two-digit
number is `12 + 16·(−6) = −84`, i.e. −0.65625. Slicing needs no logic: the
digits are just bit fields `b[3:0]`, `b[7:4]`, `b[11:8]`, `b[15:12]`. There is
therefore no separate slicing module.

Twiddle constants are integers in units of 2^-15 from −32768 to +32768.
+32768 stands for +1.0, which a Q1.15 sample cannot hold but a table can.

## The constant multiplier (`dsscm`)

The product `b·W` is the sum of the four digit products, each shifted to its
digit's weight. Table `k` (`scml_rom`, k = 0…3) stores, for each of the 16 digit
values `d`, that product already scaled to the output format:

    ROM_k[d] = floor( d · |W| · 16^k / 2^15 + 1/2 )

So a table lookup is the whole multiplication for one digit. The printed
widths of the four tables are 4, 8, 12 and 16 bits, and they hold every entry
for any |W| ≤ 1:

| table | digit | entry range for \|W\| = 1.0 | width |
|-------|-------|---------------------------|-------|
| ROM1 (k=0) | b0, 0…15 | 0…15 | 4, unsigned |
| ROM2 (k=1) | b1, 0…15 | 0…240 | 8, unsigned |
| ROM3 (k=2) | b2, 0…15 | 0…3840 | 12, unsigned |
| ROM4 (k=3) | b3, −8…7 | −32768…28672 | 16, signed |

Each table output is registered (stage 1). Three 16-bit Kogge-Stone adders
then form `(ROM1 + ROM2) + (ROM3 + ROM4)`, and the sum is registered
(stage 2). The sum always fits 16 bits: it is bounded by `|b|·1.0`.

The contents are computed at elaboration by a function (`ds_pkg::rom_entry`).
Changing the parameter `W_MAG` regenerates all four tables.

**Accuracy.** Each entry is rounded on its own, so the product can be off by
up to 2 LSB (4 × ½) from the exact `b·W/2^15`. Rounding to nearest was chosen
over truncation because it matches the published waveforms more closely. For
the constant 0x5A82, the inputs 1333, 828F, 6148, FB85 give 0D93, A74E,
44CA, FCD6. The published waveform shows 0D94, A74C, 44CC, FCD6. No simple
rounding rule reproduces those printed values exactly.

## Twiddle signs: how the complex multiplier handles negative constants

The tables store products with the *magnitude* of a constant. This keeps the
unsigned 4/8/12-bit widths, and it works for every twiddle, including the
negative cosines and sines that occur in every FFT. `complex_multiplier` runs
four constant multipliers:

    p_rr = |Wr|·Br    p_ii = |Wi|·Bi    p_ri = |Wi|·Br    p_ir = |Wr|·Bi

and must form

    Re(W·B) = sr·p_rr − si·p_ii        Im(W·B) = si·p_ri + sr·p_ir

where `sr` and `si` are the signs of `Wr` and `Wi`. These signs are fixed at
elaboration, so they only decide, per component, whether the Kogge-Stone adder
adds or subtracts (`a + ~b + 1`) and which product is the minuend:

| Wr | Wi | real part computed | imaginary part computed |
|----|----|--------------------|-------------------------|
| ≥0 | ≥0 | p_rr − p_ii | p_ri + p_ir |
| ≥0 | <0 | p_rr + p_ii | p_ir − p_ri |
| <0 | ≥0 | p_rr + p_ii = **−Re** | p_ri − p_ir |
| <0 | <0 | p_ii − p_rr | p_ri + p_ir = **−Im** |

In the two bold cases both terms are negative. A single adder with one
carry-in cannot produce `−p − q`. So the multiplier delivers `p + q`, the
negated component, and the butterfly compensates. For that component the
"adder" computes `A − m` and the "subtractor" computes `A + m`.
`ds_pkg::cm_neg_re` and `cm_neg_im` give these two cases, and `ds_butterfly`
wires them into the `SUB_RE`/`SUB_IM` parameters of its two `complex_addsub`
instances. Seen from the butterfly's ports, the outputs are always
`A ± W·B`. The real part of `complex_multiplier`'s own output is negated when
`Wr < 0 ≤ Wi`, and the imaginary part when `Wr < 0` and `Wi < 0`. Keep this in
mind if you use that module on its own.

The products need 17 bits (`|Br·Wr − Bi·Wi|` can reach 2). The multiplier
registers them: stage 3.

## The butterfly (`ds_butterfly`)

```
 a ──► delay_unit (3 clk) ─────────────────────┬──► complex_addsub (X = A + WB) ──► x, sat_x
                                               │
 b ──► complex_multiplier ──► m (17-bit) ──────┴──► complex_addsub (Y = A − WB) ──► y, sat_y
        4 × dsscm (tables + KS tree) + 2 KS adders
```

`complex_addsub` adds or subtracts one component at a time with two 18-bit
Kogge-Stone adders. It clamps each result to the 16-bit range and registers it
(stage 4). The output `sat` goes high when it clamped. The original
description keeps X and Y in the same 16-bit format as A and says nothing
about overflow. Clamping and the flag are this design's choice. A butterfly
whose inputs stay below 0.25 in magnitude can never clamp.

### Timing

| clock edge after the operands | what is registered |
|---|---|
| 1 | table outputs (16 tables) |
| 2 | constant products (4 adder trees) |
| 3 | W·B, 17-bit per component; A in the delay unit |
| 4 | X and Y, clamped; `sat_x`, `sat_y` |

One operand pair is accepted on every clock. The outputs for the pair on edge
`n` are valid after edge `n + 3`. The parameter `ds_pkg::BF_LATENCY` is 4, the
number of rising edges counting the one that samples the operands. The
two-clock latency of the constant multiplier matches its published waveform.
The split of the rest into stages is this design's choice. There is no
valid/ready handshake: the pipeline always runs, and a caller that needs
framing delays its own valid bit by `BF_LATENCY`. Reset (`rst`) is
asynchronous and active high, and clears every register.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `ds_butterfly`, `complex_multiplier` | `WR`, `WI` | 23170, 1114 (0x5A82, 0x045A) | twiddle W = WR + j·WI in units of 2^-15, −32768…32768 |
| `dsscm`, `scml_rom` | `W_MAG` | 23170 | constant magnitude, 0…32768 |
| `scml_rom` | `K` | 0 | which digit the table serves |
| `kogge_stone_adder` | `W` | 16 | adder width |
| `delay_unit` | `WIDTH`, `DEPTH` | 16, 3 | delay line shape |
| `complex_addsub` | `SUB_RE`, `SUB_IM` | 0, 0 | subtract instead of add, per component |

The default twiddle 0x5A82 + j0x045A (0.7071 + j0.0340) is the one used in
the published butterfly waveform. To place a butterfly in an N-point FFT, set
`WR = round(32768·cos(2πk/N))` and `WI = −round(32768·sin(2πk/N))` (+32768 for
+1.0; −32768 for −1.0). For N = 8 these are (32768, 0), (23170, −23170),
(0, −32768) and (−23170, −23170).

## The adder

Every addition and subtraction uses `kogge_stone_adder`, which is a Ling
adder with a Kogge-Stone prefix tree. It does not propagate the carry
`c_i = g_i | t_i·c_(i−1)` directly. Instead it computes the Ling
pseudo-carry

    H_i = g_i | t_(i−1)·H_(i−1),   H_0 = g_0 | cin,   c_i = t_i·H_i

where `g = a & b` and `t = a | b`. The recurrence for `H` is a prefix
computation over the pairs `(g_i, t_(i−1))`. It is solved in `log2 W` levels,
and in level `l` each element merges with the one `2^l` places below it
(Kogge-Stone). The true carry is needed only for the sum bit,
`sum_i = (a_i ^ b_i) ^ t_(i−1)·H_(i−1)`. Subtraction is `a + ~b` with
`cin = 1`.

## Where this RTL departs from, or adds to, the published design

* **Twiddle convention.** The text defines `W = Wr − jWi` in one place, and its
  per-digit output equations (27–30) combine terms in yet another way. The
  multiplier structure and the published butterfly waveform both use
  `(Wr + jWi)(Br + jBi)`. The RTL follows the latter, and it reproduces the
  second operand set of that waveform (A = 005E + j0300, B = 2000 + jF001 →
  X = 178A + jF8C6, Y = E932 + j0D3A) within 2 LSB. The first operand set
  printed in the same waveform does not match the printed twiddle, or any
  unit-magnitude twiddle, and is not reproduced.
* **Whole-word product instead of per-digit butterflies.** The published model
  also shows a variant with four per-digit butterflies whose outputs are
  shifted and summed. That gives the same sum of digit products. The RTL forms
  the whole product `W·B` first, as in the block diagrams of the multiplier
  and of the butterfly.
* **Table scaling and rounding**, **handling of negative constants**,
  **clamping on overflow**, **stage split after the constant multiplier** and
  **reset**: this design's choices, described above.
* **Adder.** The source names a "Kogge-Stone Ling" adder but gives no
  detail. This design uses a textbook Ling adder, described above.
* **Table alignment.** The published text says that the low 4 bits of each
  shifted table product pass through the final adder unchanged. That
  suggests unscaled products, shifted before they are added. The printed
  table widths (4/8/12/16 bits, 16-bit result) fit products that are already
  scaled to the output LSB, and this design follows the widths. The text also
  gives the output scaling once as 2^-7, a remnant of its 8-bit example; the
  16-bit format needs 2^-15.
* **Not covered:** the FPGA synthesis results (equivalent gate count 31,159 and
  549.75 MHz for the butterfly on a Virtex-II). The conventional butterfly
  they compare against is not part of this design.

## Files

| file | content |
|---|---|
| `rtl/ds_pkg.sv` | formats, `cplx_t`/`cplx_wide_t`, latencies, table formula, sign helpers |
| `rtl/kogge_stone_adder.sv` | Ling adder, Kogge-Stone prefix tree, carry-in |
| `rtl/scml_rom.sv` | one 16-entry digit × constant table, registered |
| `rtl/dsscm.sv` | constant multiplier: 4 tables + 3-adder tree |
| `rtl/complex_multiplier.sv` | W·B from 4 constant multipliers |
| `rtl/delay_unit.sv` | register delay line for A |
| `rtl/complex_addsub.sv` | A ± m with clamping |
| `rtl/ds_butterfly.sv` | top: the butterfly |
| `tb/ds_ref_pkg.sv` | integer reference model used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Each testbench compares against integer reference arithmetic
(`tb/ds_ref_pkg.sv`) and prints `TB_RESULT checks=N failures=M`.

* `tb_kogge_stone_adder`: exhaustive at 6 bits, random and corner cases at 16
  and 18 bits.
* `tb_scml_rom`: every entry of the four tables for 0.7071 and 1.0, register
  timing and reset.
* `tb_dsscm`: the published waveform pairs (±2 LSB) and the worked example
  0.65 × 0.7071 ≈ 0.4597. It also checks bit-exact results and agreement
  within 2 LSB of the exact product for three constants, and the 2-clock
  latency.
* `tb_delay_unit`, `tb_complex_addsub`: delay and clamping, including both
  clamping directions.
* `tb_complex_multiplier`: all four sign quadrants and ±1.0, bit-exact and
  within 4 LSB of exact.
* `tb_ds_butterfly`: five twiddles side by side at full rate. It counts each
  mechanism (clamping high and low on X and Y, both negated-component paths,
  streaming, latency, the waveform vector) and fails if one never occurred.
* `tb_ds_butterfly_full`: the butterfly at its default parameters through
  reset, the published vector and 2000 random operand pairs.
* `tb_fft8`: the intended use. Twelve butterflies with twiddles W8^0…W8^3 form
  an 8-point DIT FFT that takes one frame per clock with a 12-clock latency.
  Every bin is compared with a double-precision DFT. The largest error seen
  is about 2.5 LSB.

To simulate with Verilator 5, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/ds_pkg.sv tb/ds_ref_pkg.sv tb/tb_ds_butterfly.sv --top-module tb_ds_butterfly
./obj_dir/Vtb_ds_butterfly
```

Substitute any other `tb_*` name. Linting a module works the same way:
`verilator --lint-only -Wall -Irtl -y rtl rtl/ds_pkg.sv rtl/ds_butterfly.sv`.
The only remaining lint warnings are for adder carry-outs that are left
unused on purpose, because the result width already holds the full sum.
