// nfp_ref_pkg: reference model of the NFP arithmetic for the testbenches,
// written with plain integers, independent of the RTL structure.
//   ref_scale    grid scale Nmin * b^level, truncated to Q16.16 at each step
//   ref_index    table index of a corner (hash or dense, mod 2^log2_t)
//   ref_weight   interpolation weight of a corner, Q1.16
//   table_word   the table content the testbenches load: a fixed mixing
//                function of (level, entry), so any entry is known
//   ref_corner_index  index of one corner of a sample's cell
//   ref_encode   features of one sample at one level, Q8.8
//   ref_layer    one MLP layer, Q8.8 in and out, saturated, optional ReLU
package nfp_ref_pkg;

  function automatic longint unsigned ref_scale(int base, longint unsigned growth, int level);
    longint unsigned s = longint'(base) << 16;
    for (int k = 0; k < level; k++) s = ((s * growth) >> 16) & 64'hffff_ffff;
    return s;
  endfunction

  function automatic void ref_pos(int unsigned coord, longint unsigned scale,
                                  output int unsigned pint, output int unsigned pfrac);
    longint unsigned p = longint'(coord) * scale;
    pint  = int'((p >> 32) & 16'hffff);
    pfrac = int'((p >> 16) & 16'hffff);
  endfunction

  function automatic int unsigned ref_index(bit hash, int dims, int log2t, int unsigned res,
                                            int unsigned c0, int unsigned c1, int unsigned c2);
    longint unsigned h;
    if (hash) begin
      h = (longint'(c0) * 1) ^ ((longint'(c1) * 64'd2654435761) & 64'hffff_ffff);
      if (dims == 3) h = h ^ ((longint'(c2) * 64'd805459861) & 64'hffff_ffff);
    end else begin
      h = longint'(c0) + longint'(c1) * res;
      if (dims == 3) h = h + longint'(c2) * res * res;
    end
    h = h & 64'hffff_ffff;
    return int'(h & ((64'd1 << log2t) - 1));
  endfunction

  function automatic int unsigned ref_weight(int dims, int unsigned f0, int unsigned f1,
                                             int unsigned f2, int corner);
    longint unsigned w = 65536;
    int unsigned f[3] = '{f0, f1, f2};
    for (int d = 0; d < dims; d++) begin
      longint unsigned t = corner[d] ? f[d] : 65536 - f[d];
      w = (w * t) >> 16;
    end
    return int'(w);
  endfunction

  function automatic int unsigned table_word(int level, int unsigned idx);
    int unsigned x = idx * 32'h9e37_79b1 + level * 32'h85eb_ca6b;
    x = x ^ (x >> 15);
    x = x * 32'h2c1b_3c6d;
    x = x ^ (x >> 12);
    return x & 16'hffff;
  endfunction

  // table index of corner c of the cell holding sample (x0,x1,x2) at a level
  function automatic int unsigned ref_corner_index(bit hash, int dims, int log2t, int base,
                                                   longint unsigned growth, int level,
                                                   int unsigned x0, int unsigned x1,
                                                   int unsigned x2, int c);
    longint unsigned s = ref_scale(base, growth, level);
    int unsigned pi[3], pf[3], x[3];
    int unsigned res = (int'((s >> 16) & 16'hffff) + 2) & 16'hffff;
    x = '{x0, x1, x2};
    for (int d = 0; d < 3; d++) ref_pos(x[d], s, pi[d], pf[d]);
    return ref_index(hash, dims, log2t, res, pi[0] + c[0], pi[1] + c[1], pi[2] + c[2]);
  endfunction

  // features of one sample at one level: f[0], f[1] as signed Q8.8
  function automatic void ref_encode(bit hash, int dims, int log2t, int base,
                                     longint unsigned growth, int level,
                                     int unsigned x0, int unsigned x1, int unsigned x2,
                                     output int f0, output int f1);
    longint unsigned s = ref_scale(base, growth, level);
    int unsigned pi[3], pf[3], x[3];
    int unsigned res = int'((s >> 16) & 16'hffff) + 2;
    longint acc0 = 0, acc1 = 0;
    x = '{x0, x1, x2};
    for (int d = 0; d < 3; d++) ref_pos(x[d], s, pi[d], pf[d]);
    for (int c = 0; c < (1 << dims); c++) begin
      int unsigned idx = ref_index(hash, dims, log2t, res & 16'hffff, pi[0] + c[0], pi[1] + c[1],
                                   pi[2] + c[2]);
      int unsigned w   = ref_weight(dims, pf[0], pf[1], pf[2], c);
      int unsigned tw  = table_word(level, idx);
      acc0 += longint'(w) * longint'($signed(8'(tw)));
      acc1 += longint'(w) * longint'($signed(8'(tw >> 8)));
    end
    f0 = int'($signed(16'(acc0 >>> 14)));
    f1 = int'($signed(16'(acc1 >>> 14)));
  endfunction

  // y = sat16((W a) >>> 8), ReLU if relu; W[j][i] and a[i] are Q8.8
  function automatic void ref_layer(input int w[64][64], input int a[64], input bit relu,
                                    output int y[64]);
    for (int j = 0; j < 64; j++) begin
      longint s = 0;
      for (int i = 0; i < 64; i++) s += longint'(w[j][i]) * longint'(a[i]);
      s = s >>> 8;
      if (s > 32767) s = 32767;
      if (s < -32768) s = -32768;
      if (relu && s < 0) s = 0;
      y[j] = int'(s);
    end
  endfunction

endpackage
