// ds_pkg -- shared constants, types and table arithmetic of the digit-slicing
// multiplier-less radix-2 butterfly.
//
// Number format: every sample is a 16-bit two's complement fraction (Q1.15),
// |x| < 1. A word is cut into B_SLICES = 4 slices of P_BITS = 4 bits,
// x = (sum_k 2^(4k) X_k) * 2^-15, where X_0..X_2 are unsigned digits 0..15 and
// the top digit X_3 is signed (-8..7) because it holds the sign bit.
//
// Twiddle constants are given as signed integers in units of 2^-15, in the
// range -32768..32768 (32768 stands for +1.0, which Q1.15 cannot hold). The
// lookup tables are built from the magnitude of a constant; its sign is applied
// later by choosing addition or subtraction (see cm_neg_re / cm_neg_im).
//
// Table entries are rounded to the nearest LSB of the output (ties upward):
//   ROM_k[d] = floor(d * |W| * 2^(4k) / 2^15 + 1/2)
// so each of the four lookups is off by at most half an LSB.
package ds_pkg;

  localparam int unsigned DATA_W   = 16;  // sample width (Fig. 8, Fig. 9)
  localparam int unsigned P_BITS   = 4;   // bits per slice (p)
  localparam int unsigned B_SLICES = 4;   // number of slices (b)
  localparam int unsigned FRAC     = DATA_W - 1;  // 2^-(pb-1) scaling, Eq. 10

  localparam int signed W_ONE = 32768;    // +1.0 in twiddle units

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic [P_BITS-1:0]        slice_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // Twiddle product, one bit wider than a sample: |Wr*Br| + |Wi*Bi| can
  // reach 2.0.
  typedef logic signed [DATA_W:0] wide_t;

  typedef struct packed {
    wide_t re;
    wide_t im;
  } cplx_wide_t;

  // Pipeline depths, in clocks.
  localparam int unsigned DSSCM_LATENCY = 2;  // table register + adder tree register
  localparam int unsigned CM_LATENCY    = DSSCM_LATENCY + 1;  // + real adder/subtractor
  localparam int unsigned BF_LATENCY    = CM_LATENCY + 1;     // + complex adder/subtractor

  // Width of lookup table k as printed in Fig. 9: 4, 8, 12, 16 bits.
  function automatic int unsigned rom_width(int unsigned k);
    return P_BITS * (k + 1);
  endfunction

  // Value of digit d (0..15) of slice k: the top slice is signed.
  function automatic int signed slice_value(int unsigned k, int unsigned d);
    if (k == B_SLICES - 1 && d >= (1 << (P_BITS - 1)))
      return int'(d) - (1 << P_BITS);
    return int'(d);
  endfunction

  // Entry d of lookup table k for a constant of magnitude w_mag (0..32768).
  function automatic int signed rom_entry(int unsigned k, int unsigned d,
                                          int unsigned w_mag);
    longint signed v;
    v = longint'(slice_value(k, d)) * longint'(w_mag) * (longint'(1) << (P_BITS * k));
    v = (v + (longint'(1) << (FRAC - 1))) >>> FRAC;
    return int'(v);
  endfunction

  function automatic int unsigned abs_w(int signed w);
    return (w < 0) ? int'(-w) : int'(w);
  endfunction

  // The complex multiplier works with |Wr| and |Wi|. Its real output is
  //   +-|Wr|Br -+ |Wi|Bi; when both terms carry a minus sign it delivers the
  // magnitude sum and flags the component as negated, and the butterfly swaps
  // its addition and subtraction for that component (X = A - m, Y = A + m).
  function automatic bit cm_neg_re(int signed wr, int signed wi);
    return (wr < 0) && (wi >= 0);
  endfunction

  function automatic bit cm_neg_im(int signed wr, int signed wi);
    return (wr < 0) && (wi < 0);
  endfunction

endpackage
