// tb_polar_pkg: reference functions for the polar decoder testbenches, written
// independently of the RTL: polarization-weight frozen set (rank by weight, ties to the
// higher index), polar encoder, bit-serial CRC-24 and a noisy BPSK channel quantised to
// 6-bit sign-magnitude LLRs.
package tb_polar_pkg;
  int unsigned seed_state = 32'h1234_5678;

  function automatic int unsigned rnd();
    seed_state = seed_state * 1103515245 + 12345;
    return seed_state >> 8;
  endfunction

  function automatic int pw_weight(int idx);
    real s;
    s = 0.0;
    for (int j = 0; j < 16; j++)
      if ((idx >> j) & 1) s += $floor(256.0 * (2.0 ** (j / 4.0)) + 0.5);
    return int'(s);
  endfunction

  // frozen[i] = 1 for frozen bits; good[i] = 1 for the g most reliable bits
  function automatic void make_sets(int n, int k, int g, ref bit frozen[], ref bit good[]);
    int nn, cnt, wi;
    int wt[];
    nn = 1 << n;
    frozen = new[nn];
    good = new[nn];
    wt = new[nn];
    for (int i = 0; i < nn; i++) wt[i] = pw_weight(i);
    for (int i = 0; i < nn; i++) begin
      cnt = 0;
      wi = wt[i];
      for (int j = 0; j < nn; j++)
        if (wt[j] > wi || (wt[j] == wi && j > i)) cnt++;
      frozen[i] = !(cnt < k);
      good[i] = cnt < g;
    end
  endfunction

  function automatic void polar_encode(ref bit u[], ref bit x[]);
    int nn;
    nn = u.size();
    x = new[nn];
    for (int i = 0; i < nn; i++) x[i] = u[i];
    for (int s = 1; s < nn; s = s * 2)
      for (int j = 0; j < nn; j++)
        if ((j & s) == 0) x[j] = x[j] ^ x[j | s];
  endfunction

  function automatic bit [23:0] crc24(ref bit d[], input int len);
    bit [23:0] c;
    bit fb;
    c = '0;
    for (int i = 0; i < len; i++) begin
      fb = c[23] ^ d[i];
      c = {c[22:0], 1'b0};
      if (fb) c = c ^ 24'hB2B117;
    end
    return c;
  endfunction

  // info bits (with CRC if crc_en) placed on the non-frozen positions
  function automatic void make_frame(int n, int k, bit crc_en, ref bit frozen[], ref bit u[],
                                     ref bit info[]);
    int nn, p, nd;
    bit [23:0] c;
    nn = 1 << n;
    u = new[nn];
    info = new[k];
    nd = crc_en ? k - 24 : k;
    for (int i = 0; i < nd; i++) info[i] = rnd() & 1;
    if (crc_en) begin
      c = crc24(info, nd);
      for (int i = 0; i < 24; i++) info[nd + i] = c[23 - i];
    end
    p = 0;
    for (int i = 0; i < nn; i++) begin
      u[i] = 0;
      if (!frozen[i]) begin
        u[i] = info[p];
        p++;
      end
    end
  endfunction

  // BPSK amplitude amp, noise = sum of four uniforms in [-spread, spread]
  function automatic bit [5:0] channel_llr(bit xb, int amp, int spread);
    int v;
    v = xb ? -amp : amp;
    if (spread > 0)
      for (int r = 0; r < 4; r++) v += int'(rnd() % (2 * spread + 1)) - spread;
    if (v > 31) v = 31;
    if (v < -31) v = -31;
    return (v < 0) ? {1'b1, 5'(-v)} : {1'b0, 5'(v)};
  endfunction
endpackage
