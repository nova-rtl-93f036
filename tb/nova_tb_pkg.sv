// nova_tb_pkg - reference model shared by the NOVA testbenches.
//
// Written independently of the RTL: the segment is found by scanning the
// breakpoints from the top, and the multiply-add uses 64-bit integers with
// an explicit floor division by 2**FRAC_BITS and explicit clipping.
package nova_tb_pkg;
  import nova_pkg::*;

  // Highest k in 1..n-1 with x >= d[k], else 0.
  function automatic int ref_seg(word_t x, word_t d [MAX_BP], int n);
    for (int k = n - 1; k >= 1; k--)
      if (x >= d[k]) return k;
    return 0;
  endfunction

  // y = floor(a*x / 2**FRAC_BITS) + b, clipped to 16 bits; s = clipped.
  function automatic word_t ref_mac(word_t x, word_t a, word_t b, output logic s);
    longint p, q, r, den;
    den = longint'(1) << FRAC_BITS;
    p = longint'(x) * longint'(a);
    q = (p >= 0) ? (p / den) : -((-p + den - 1) / den);
    r = q + longint'(b);
    s = 1'b0;
    if (r > 32767)  begin s = 1'b1; return 16'sh7fff; end
    if (r < -32768) begin s = 1'b1; return 16'sh8000; end
    return word_t'(r);
  endfunction

  // Flit of 16-breakpoint mode with tag t (slot i = pair 2i+t), or of
  // 8-breakpoint mode (slot i = pair i, tag 0).
  function automatic flit_t ref_flit(pair_t tbl [MAX_BP], logic two, logic t);
    flit_t f;
    f.tag = two ? t : 1'b0;
    for (int i = 0; i < 8; i++) f.pairs[i] = two ? tbl[2*i + int'(t)] : tbl[i];
    return f;
  endfunction
endpackage
