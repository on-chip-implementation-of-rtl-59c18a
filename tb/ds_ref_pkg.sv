// ds_ref_pkg -- reference arithmetic for the butterfly testbenches.
//
// Plain integer models, written apart from the RTL, of the quantities the
// design produces: one lookup-table entry, the rounded-per-table constant
// product, the twiddle product W*B and the saturated butterfly outputs.
// Samples are Q1.15 integers (-32768..32767); twiddles are integers in units
// of 2^-15 (-32768..32768).
package ds_ref_pkg;

  function automatic int s16(int v);  // reinterpret the low 16 bits as signed
    v = v & 16'hFFFF;
    return (v >= 32768) ? v - 65536 : v;
  endfunction

  function automatic int sat16(int v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // Entry d of table k: the slice value times the constant, weighted by
  // 16^k, divided by 2^15 and rounded to nearest (ties up).
  function automatic int rom_ref(int k, int d, int w_mag);
    longint v, num;
    v   = (k == 3 && d >= 8) ? d - 16 : d;
    num = v * longint'(w_mag) * (longint'(1) << (4 * k)) + 16384;
    // floor division by 2^15
    if (num >= 0) return int'(num / 32768);
    return int'(-((-num + 32767) / 32768));
  endfunction

  // Constant product as the table-based multiplier forms it.
  function automatic int dsscm_ref(int b, int w_mag);
    int u, acc;
    u   = b & 16'hFFFF;
    acc = 0;
    for (int k = 0; k < 4; k++) acc += rom_ref(k, (u >> (4 * k)) & 15, w_mag);
    return acc;
  endfunction

  function automatic int sgn(int w);
    return (w < 0) ? -1 : 1;
  endfunction

  function automatic int iabs(int w);
    return (w < 0) ? -w : w;
  endfunction

  // True (signed) twiddle product W*B, built from the per-table products.
  function automatic int wb_re_ref(int br, int bi, int wr, int wi);
    return sgn(wr) * dsscm_ref(br, iabs(wr)) - sgn(wi) * dsscm_ref(bi, iabs(wi));
  endfunction

  function automatic int wb_im_ref(int br, int bi, int wr, int wi);
    return sgn(wi) * dsscm_ref(br, iabs(wi)) + sgn(wr) * dsscm_ref(bi, iabs(wr));
  endfunction

  // Exact products, rounded down, for accuracy bounds.
  function automatic int exact_re(int br, int bi, int wr, int wi);
    longint n;
    n = longint'(br) * wr - longint'(bi) * wi;
    return int'(n >>> 15);
  endfunction

  function automatic int exact_im(int br, int bi, int wr, int wi);
    longint n;
    n = longint'(br) * wi + longint'(bi) * wr;
    return int'(n >>> 15);
  endfunction

endpackage
