// tb_ref_pkg: reference arithmetic for the testbenches. Written as plain
// sequential code from the number formats documented in the RTL headers, so the
// testbenches can compare the hardware bit for bit where the format is exact, and
// against real-valued math with a tolerance where it is an approximation.
// Also holds the synthetic weight and input generators shared by the HBM model.
package tb_ref_pkg;

  function automatic int unsigned hash32(int unsigned x);
    x ^= x >> 16; x *= 32'h7feb352d; x ^= x >> 15; x *= 32'h846ca68b; x ^= x >> 16;
    return x;
  endfunction

  // synthetic weight byte for lane l of the word at address a: uniform in [-15, 15]
  function automatic int wgen(logic [31:0] a, int l);
    return int'(hash32(a * 97 + l * 7 + 1) % 31) - 15;
  endfunction

  // synthetic input activation: uniform in [-32, 31] (i.e. [-2, 2) with 4 fraction bits)
  function automatic int xgen(int slot, int tok, int e);
    return int'(hash32(slot * 100003 + tok * 1009 + e + 55) % 64) - 32;
  endfunction

  function automatic int sat8(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic logic [31:0] waddr(int layer, int m, int col, int word);
    return {1'b1, 5'b0, 5'(layer), 3'(m), 12'(col), 6'(word)};
  endfunction

  function automatic logic [31:0] aaddr(int region, int slot, int head, int tok, int word);
    return {1'b0, 3'(region), 5'(slot), 5'(head), 12'(tok), 6'(word)};
  endfunction

  // weight W[k][c] of matrix m in layer, LANES lanes per word
  function automatic int weight(int lanes, int layer, int m, int k, int c);
    return wgen(waddr(layer, m, c, k / lanes), k % lanes);
  endfunction

  // e^x for x with 8 fraction bits -> 12 fraction bits, 2^(x log2 e) with the
  // documented polynomial for the fractional power
  function automatic longint exp_fx(longint x);
    longint t, yi, f, p, r;
    if (x < -4096) x = -4096;
    if (x > 2047) x = 2047;
    t  = (x * 5909) >>> 8;
    yi = t >>> 12;
    f  = t & 4095;
    p  = 4096 + ((f * (2689 + ((1407 * f) >> 12))) >> 12);
    r  = (yi >= 0) ? (p << yi) : (p >> (-yi));
    if (r > 24'hFFFFFF) r = 24'hFFFFFF;
    return r;
  endfunction

  function automatic int gelu_fx(int x);
    int t, at, d, l, prod;
    t  = (x * 11585) >>> 4;
    at = (t < 0) ? -t : t;
    if (at > 28983) at = 28983;
    d  = at - 28983;
    l  = 16384 - ((4732 * ((d * d) >>> 14)) >>> 14);
    if (t < 0) l = -l;
    prod = x * (16384 + l);
    return sat8((prod + 16384) >>> 15);
  endfunction

  function automatic longint isqrt(longint v);
    longint r;
    r = 0;
    for (int b = 31; b >= 0; b--)
      if ((r | (64'sd1 << b)) * (r | (64'sd1 << b)) <= v) r |= (64'sd1 << b);
    return r;
  endfunction

  function automatic int unsigned rsqrt16(int unsigned d);
    longint unsigned r;
    r = 0;
    for (int b = 16; b >= 0; b--)
      if ((r | (64'd1 << b)) * (r | (64'd1 << b)) * d <= 64'd1 << 32) r |= (64'd1 << b);
    return int'(r);
  endfunction

  // layer normalization of one row, integer form documented in layernorm_unit
  function automatic void layernorm(input int n, ref int v [], output int y []);
    longint s1, s2, vn, r, rc;
    s1 = 0; s2 = 0;
    for (int i = 0; i < n; i++) begin s1 += v[i]; s2 += v[i] * v[i]; end
    vn = longint'(n) * s2 - s1 * s1;
    r  = isqrt(vn);
    if (r == 0) r = 1;
    rc = (64'sd1 <<< 40) / r;
    y = new[n];
    for (int i = 0; i < n; i++) y[i] = sat8(((longint'(n) * v[i] - s1) * 16 * rc) >>> 40);
  endfunction

endpackage
