// tb_ref_pkg: reference models and stimulus generators shared by the
// testbenches. Written independently of the RTL: the compressor model tries the
// encodings with signed 64-bit arithmetic, the SECDED model builds the whole
// code word and computes each check bit as a parity over positions, and the
// placement model walks the frame byte by byte.
package tb_ref_pkg;

  typedef byte unsigned u8;
  typedef u8 blk_a [64];
  typedef u8 frm_a [66];

  // class code, CB size in bytes
  function automatic int ref_cb_len(int cc);
    if (cc == 0) return 0;
    if (cc >= 1 && cc <= 7) return 8 + 7 * cc;
    if (cc == 8) return 19;
    return 64;
  endfunction

  function automatic longint unsigned word8(blk_a b, int i);
    longint unsigned v = 0;
    for (int k = 7; k >= 0; k--) v = (v << 8) | longint'(b[8*i + k]);
    return v;
  endfunction

  function automatic int unsigned word4(blk_a b, int i);
    int unsigned v = 0;
    for (int k = 3; k >= 0; k--) v = (v << 8) | 32'(b[4*i + k]);
    return v;
  endfunction

  function automatic bit fits_b8(blk_a b, int d);
    longint dl, lim;
    for (int i = 1; i < 8; i++) begin
      dl = longint'(word8(b, i) - word8(b, 0));
      if (d < 8) begin
        lim = longint'(64'd1) << (8 * d - 1);
        if (dl < -lim || dl >= lim) return 0;
      end
    end
    return 1;
  endfunction

  function automatic bit fits_b4(blk_a b);
    int dl;
    for (int i = 1; i < 16; i++) begin
      dl = int'(word4(b, i) - word4(b, 0));
      if (dl < -128 || dl > 127) return 0;
    end
    return 1;
  endfunction

  // Reference compressor: smallest feasible class and its CB image.
  function automatic void ref_compress(input blk_a b, output int cc, output blk_a cb);
    int order [10] = '{0, 1, 8, 2, 3, 4, 5, 6, 7, 15};
    bit z = 1;
    longint unsigned dl;
    int unsigned dl4;
    foreach (b[k]) if (b[k] != 0) z = 0;
    foreach (cb[k]) cb[k] = 0;
    cc = 15;
    foreach (order[n]) begin
      int c = order[n];
      bit ok;
      if (c == 0) ok = z;
      else if (c == 8) ok = fits_b4(b);
      else if (c == 15) ok = 1;
      else ok = fits_b8(b, c);
      if (ok) begin cc = c; break; end
    end
    if (cc == 15) foreach (b[k]) cb[k] = b[k];
    else if (cc == 8) begin
      for (int k = 0; k < 4; k++) cb[k] = b[k];
      for (int i = 1; i < 16; i++) begin
        dl4 = word4(b, i) - word4(b, 0);
        cb[3 + i] = dl4[7:0];
      end
    end else if (cc != 0) begin
      for (int k = 0; k < 8; k++) cb[k] = b[k];
      for (int i = 1; i < 8; i++) begin
        dl = word8(b, i) - word8(b, 0);
        for (int k = 0; k < cc; k++) cb[8 + (i - 1) * cc + k] = u8'(dl >> (8 * k));
      end
    end
  endfunction

  // Reference SECDED: returns ECB length, fills ecb (CB bytes then checks).
  function automatic int ref_ecc(input int cc, input blk_a cb, output frm_a ecb);
    int len = ref_cb_len(cc);
    int nd = 4 + 8 * len;
    int r = 0;
    bit cw [1024];
    bit d [516];
    int pos, nchk, n, chk;
    bit par;
    foreach (ecb[k]) ecb[k] = 0;
    foreach (cw[k]) cw[k] = 0;
    for (int k = 0; k < 4; k++) d[k] = cc[k];
    for (int k = 0; k < 8 * len; k++) d[4 + k] = cb[k / 8][k % 8];
    while ((1 << r) < nd + r + 1) r++;
    n = nd + r;
    pos = 0;
    for (int j = 1; j <= n; j++)
      if ((j & (j - 1)) != 0) begin cw[j] = d[pos]; pos++; end
    chk = 0;
    for (int i = 0; i < r; i++) begin
      bit p = 0;
      for (int j = 1; j <= n; j++) if (((j >> i) & 1) != 0) p ^= cw[j];
      chk |= int'(p) << i;
    end
    par = 0;
    for (int k = 0; k < nd; k++) par ^= d[k];
    for (int i = 0; i < r; i++) par ^= chk[i];
    nchk = (r + 1 + 7) / 8;
    for (int k = 0; k < len; k++) ecb[k] = cb[k];
    if (nchk == 1) ecb[len] = u8'(chk | (int'(par) << 7));
    else begin
      ecb[len] = u8'(chk);
      ecb[len + 1] = u8'((chk >> 8) | (int'(par) << 2));
    end
    return len + nchk;
  endfunction

  // Reference placement: pos[j] = frame byte receiving ECB byte j (-1 if none)
  function automatic void ref_place(input bit fm [66], input int start, input int len,
                                    output int pos [66]);
    int j = 0;
    foreach (pos[k]) pos[k] = -1;
    for (int o = 0; o < 66; o++) begin
      int p = (start + o) % 66;
      if (!fm[p]) begin
        if (j < len) pos[j] = p;
        j++;
      end
    end
  endfunction

  // Block generator: kind 0 zero, 1..7 B8 with d-byte deltas, 8 B4 1-byte
  // deltas, other: random bytes.
  function automatic blk_a gen_block(int kind);
    blk_a b;
    longint unsigned base, w;
    int unsigned base4, w4;
    foreach (b[k]) b[k] = u8'($urandom);
    if (kind == 0) foreach (b[k]) b[k] = 0;
    else if (kind >= 1 && kind <= 7) begin
      base = {$urandom, $urandom};
      for (int i = 0; i < 8; i++) begin
        longint dl = 0;
        if (i > 0) begin
          dl = longint'({$urandom, $urandom});
          if (kind < 8) dl = dl >>> (64 - 8 * kind);   // signed, fits kind bytes
        end
        w = base + longint'(dl);
        for (int k = 0; k < 8; k++) b[8*i + k] = u8'(w >> (8 * k));
      end
    end else if (kind == 8) begin
      base4 = $urandom;
      for (int i = 0; i < 16; i++) begin
        w4 = base4 + ((i == 0) ? 0 : int'($signed(8'($urandom))));
        for (int k = 0; k < 4; k++) b[4*i + k] = u8'(w4 >> (8 * k));
      end
    end
    return b;
  endfunction

endpackage
