// tb_ref_pkg: integer reference models of the f/g functions and of SC decoding inside a
// 32-bit block, used by the unit testbenches.
package tb_ref_pkg;
  function automatic int sm2i(int v, int q);
    int m;
    m = v & ((1 << (q - 1)) - 1);
    return ((v >> (q - 1)) & 1) ? -m : m;
  endfunction

  function automatic int i2sm(int v, int q);
    int mx;
    mx = (1 << (q - 1)) - 1;
    if (v > mx) v = mx;
    if (v < -mx) v = -mx;
    return (v < 0) ? ((1 << (q - 1)) | -v) : v;
  endfunction

  function automatic int ref_f(int a, int b);    // plain integers
    int m;
    m = (a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  function automatic int ref_g(int a, int b, bit s);
    return s ? b - a : b + a;
  endfunction

  function automatic int clampq(int v, int q);
    int mx;
    mx = (1 << (q - 1)) - 1;
    return v > mx ? mx : (v < -mx ? -mx : v);
  endfunction

  // stage-0 LLR of bit idx of a block of m LLRs (integers), given decided bits
  function automatic int sc_llr(int llr[], bit bits[], int idx, int q, int q0);
    int m, h;
    int nxt[];
    bit sub[], enc[];
    m = llr.size();
    if (m == 1) return llr[0];
    h = m / 2;
    nxt = new[h];
    sub = new[h];
    if (idx < h) begin
      for (int j = 0; j < h; j++) nxt[j] = clampq(ref_f(llr[j], llr[j + h]), (h == 1) ? q0 : q);
      for (int j = 0; j < h; j++) sub[j] = bits[j];
      return sc_llr(nxt, sub, idx, q, q0);
    end
    enc = new[h];
    for (int j = 0; j < h; j++) enc[j] = bits[j];
    for (int s = 1; s < h; s = s * 2)
      for (int j = 0; j < h; j++) if ((j & s) == 0) enc[j] = enc[j] ^ enc[j | s];
    for (int j = 0; j < h; j++) nxt[j] = clampq(ref_g(llr[j], llr[j + h], enc[j]), (h == 1) ? q0 : q);
    for (int j = 0; j < h; j++) sub[j] = bits[j + h];
    return sc_llr(nxt, sub, idx - h, q, q0);
  endfunction
endpackage
