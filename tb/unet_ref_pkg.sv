// unet_ref_pkg: bit-exact reference model of the de-blending U-Net, used by
// the testbenches to work out expected outputs independently of the RTL.
//
// It is written as plain loops over whole arrays, with rounding done by
// integer division (round half to even, then saturate to 16 bits) rather
// than by shifts as the hardware does. Maps are position-major arrays of
// ints (word p*CH + c), parameters are signed 8-bit values in the same
// global order the hardware's parameter window uses.
package unet_ref_pkg;

  typedef int iarr_t[];

  function automatic int rnd(input longint v, input int fin, input int fout);
    longint q, r, d;
    if (fin > fout) begin
      d = longint'(1) << (fin - fout);
      q = v / d;
      r = v - q * d;
      if (r < 0) begin q = q - 1; r = r + d; end
      if (2 * r > d || (2 * r == d && (q % 2 != 0))) q = q + 1;
    end else q = v * (longint'(1) << (fout - fin));
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

  // parameters: w[(k*cin+c)*cout+o] then b[o]; kernel 2
  function automatic iarr_t conv(input iarr_t x, input int len, input int cin, input int cout,
                                 input int stride, input iarr_t prm, input int base,
                                 input int fin, input int fout);
    int olen;
    iarr_t y;
    longint acc;
    olen = (len - 2) / stride + 1;
    y = new[olen * cout];
    for (int p = 0; p < olen; p++)
      for (int o = 0; o < cout; o++) begin
        acc = longint'(prm[base + 2 * cin * cout + o]) * (longint'(1) << (fin + 1));
        for (int k = 0; k < 2; k++)
          for (int c = 0; c < cin; c++)
            acc += longint'(x[(p * stride + k) * cin + c]) * prm[base + (k * cin + c) * cout + o];
        if (acc < 0) acc = 0;
        y[p * cout + o] = rnd(acc, fin + 5, fout);
      end
    return y;
  endfunction

  function automatic iarr_t bnorm(input iarr_t x, input iarr_t prm, input int base,
                                  input int fin, input int fout);
    iarr_t y;
    y = new[x.size()];
    foreach (x[i])
      y[i] = rnd(longint'(x[i]) * prm[base] + longint'(prm[base + 1]) * (longint'(1) << (fin + 1)),
                 fin + 5, fout);
    return y;
  endfunction

  function automatic iarr_t pool(input iarr_t x, input int len, input int ch, input int fin, input int fout);
    iarr_t y;
    y = new[(len / 2) * ch];
    for (int p = 0; p < len / 2; p++)
      for (int c = 0; c < ch; c++)
        y[p * ch + c] = rnd(x[2 * p * ch + c] > x[(2 * p + 1) * ch + c] ?
                            x[2 * p * ch + c] : x[(2 * p + 1) * ch + c], fin, fout);
    return y;
  endfunction

  function automatic iarr_t upsample(input iarr_t x, input int len, input int ch, input int fin, input int fout);
    iarr_t y;
    y = new[2 * len * ch];
    for (int q = 0; q < 2 * len; q++)
      for (int c = 0; c < ch; c++) y[q * ch + c] = rnd(x[(q / 2) * ch + c], fin, fout);
    return y;
  endfunction

  function automatic iarr_t zeropad(input iarr_t x, input int len, input int ch, input int pl,
                                    input int pr, input int fin, input int fout);
    iarr_t y;
    y = new[(len + pl + pr) * ch];
    foreach (y[i]) y[i] = 0;
    for (int q = 0; q < len; q++)
      for (int c = 0; c < ch; c++) y[(q + pl) * ch + c] = rnd(x[q * ch + c], fin, fout);
    return y;
  endfunction

  function automatic iarr_t concat(input iarr_t a, input iarr_t b, input int len, input int ca,
                                   input int cb, input int fa, input int fb, input int fout);
    iarr_t y;
    y = new[len * (ca + cb)];
    for (int q = 0; q < len; q++) begin
      for (int c = 0; c < ca; c++) y[q * (ca + cb) + c] = rnd(a[q * ca + c], fa, fout);
      for (int c = 0; c < cb; c++) y[q * (ca + cb) + ca + c] = rnd(b[q * cb + c], fb, fout);
    end
    return y;
  endfunction

  // dense nin -> nout, sigmoid table of tbl entries over [-8, 8);
  // prm: w[i*nout+o], b[o], table[k] (table entries unsigned 0..255)
  function automatic iarr_t dense(input iarr_t x, input int nin, input int nout, input iarr_t prm,
                                  input int base, input int tbl, input int fin, input int fout);
    iarr_t y;
    longint acc;
    int v, idx;
    y = new[nout];
    for (int o = 0; o < nout; o++) begin
      acc = longint'(prm[base + nin * nout + o]) * (longint'(1) << (fin + 1));
      for (int i = 0; i < nin; i++) acc += longint'(x[i]) * prm[base + i * nout + o];
      v = rnd(acc, fin + 5, fout);
      // index = floor((v / 2^fout + 8) * tbl / 16)
      idx = int'($floor((real'(v) / real'(longint'(1) << fout) + 8.0) * real'(tbl) / 16.0));
      if (idx < 0) idx = 0;
      if (idx > tbl - 1) idx = tbl - 1;
      y[o] = (prm[base + nin * nout + nout + idx] & 255) * 4;
    end
    return y;
  endfunction

  // parameter index bases of the whole network
  localparam int PB_BN = 0, PB_C1 = 2, PB_C2 = 14, PB_C3 = 50, PB_C4 = 104, PB_C5 = 182,
                 PB_C6 = 286, PB_C7 = 422, PB_C8 = 596, PB_C9 = 674, PB_C10 = 758,
                 PB_D = 794, N_PRM = 794 + 256 * 520 + 520 + 1024;

  function automatic iarr_t unet(input iarr_t x, input iarr_t prm);
    iarr_t bn, c1, c2, p1, c3, c4, p2, c5, c6, u1, z1, k1, c7, c8, u2, z2, k2, c9, c10;
    bn  = bnorm(x, prm, PB_BN, 9, 9);
    c1  = conv(bn, 260, 1, 4, 1, prm, PB_C1, 9, 8);
    c2  = conv(c1, 259, 4, 4, 1, prm, PB_C2, 8, 7);
    p1  = pool(c2, 258, 4, 7, 7);
    c3  = conv(p1, 129, 4, 6, 1, prm, PB_C3, 7, 7);
    c4  = conv(c3, 128, 6, 6, 1, prm, PB_C4, 7, 7);
    p2  = pool(c4, 127, 6, 7, 7);
    c5  = conv(p2, 63, 6, 8, 1, prm, PB_C5, 7, 7);
    c6  = conv(c5, 62, 8, 8, 1, prm, PB_C6, 7, 7);
    u1  = upsample(c6, 61, 8, 7, 7);
    z1  = zeropad(u1, 122, 8, 2, 3, 7, 7);
    k1  = concat(z1, c4, 127, 8, 6, 7, 7, 7);
    c7  = conv(k1, 127, 14, 6, 1, prm, PB_C7, 7, 7);
    c8  = conv(c7, 126, 6, 6, 1, prm, PB_C8, 7, 6);
    u2  = upsample(c8, 125, 6, 6, 6);
    z2  = zeropad(u2, 250, 6, 4, 4, 6, 6);
    k2  = concat(z2, c2, 258, 6, 4, 6, 7, 6);
    c9  = conv(k2, 258, 10, 4, 2, prm, PB_C9, 6, 6);
    c10 = conv(c9, 129, 4, 4, 2, prm, PB_C10, 6, 9);
    return dense(c10, 256, 520, prm, PB_D, 1024, 9, 10);
  endfunction

  // a sigmoid table: entry k = round(256 / (1 + exp(-x))), x = (k + 0.5)*16/tbl - 8,
  // saturated at 255
  function automatic int sig_entry(input int k, input int tbl);
    real xv, s;
    int e;
    xv = (real'(k) + 0.5) * 16.0 / real'(tbl) - 8.0;
    s  = 256.0 / (1.0 + $exp(-xv));
    e  = int'(s);
    return e > 255 ? 255 : e;
  endfunction

endpackage
