// tb_ref_pkg: reference models used by the testbenches, written independently of the
// RTL: a software LZ4 block decoder and a greedy LZ4 encoder that uses arbitrary
// match offsets, the bit-plane transpose and the KV transform written element by
// element, and the expected element code of a precision view (sign, kept exponent and
// mantissa bits, round to nearest even on the guard bits, saturating).
package tb_ref_pkg;

  typedef byte unsigned bytes_t[];

  // LZ4 block decode; returns 1 when the stream is well formed and yields n bytes
  function automatic bit lz4_decode(input bytes_t src, input int n, output bytes_t dst);
    int ip = 0;
    int op = 0;
    dst = new[n];
    while (ip < src.size()) begin
      int tok, ll, ml, off, b;
      tok = src[ip++];
      ll = tok >> 4;
      if (ll == 15) begin
        do begin
          if (ip >= src.size()) return 0;
          b = src[ip++];
          ll += b;
        end while (b == 255);
      end
      for (int k = 0; k < ll; k++) begin
        if (ip >= src.size() || op >= n) return 0;
        dst[op++] = src[ip++];
      end
      if (ip == src.size()) return (op == n);
      if (ip + 2 > src.size()) return 0;
      off = src[ip] | (int'(src[ip+1]) << 8);
      ip += 2;
      ml = tok & 15;
      if (ml == 15) begin
        do begin
          if (ip >= src.size()) return 0;
          b = src[ip++];
          ml += b;
        end while (b == 255);
      end
      ml += 4;
      if (off == 0 || off > op) return 0;
      for (int k = 0; k < ml; k++) begin
        if (op >= n) return 0;
        dst[op] = dst[op - off];
        op++;
      end
    end
    return 0;
  endfunction

  // greedy LZ4 encoder searching every earlier offset (window = whole block)
  function automatic bytes_t lz4_encode(input bytes_t src);
    byte unsigned out[$];
    int n = src.size();
    int i = 0;
    int anchor = 0;
    while (i <= n - 12) begin
      int best_len = 0;
      int best_off = 0;
      for (int o = 1; o <= i && o <= 65535; o++) begin
        int l = 0;
        while (i + l < n - 5 && src[i + l] == src[i + l - o]) l++;
        if (l > best_len) begin best_len = l; best_off = o; end
      end
      if (best_len >= 4) begin
        int ll = i - anchor;
        int ml = best_len - 4;
        out.push_back(byte'(((ll >= 15 ? 15 : ll) << 4) | (ml >= 15 ? 15 : ml)));
        if (ll >= 15) begin
          int r = ll - 15;
          while (r >= 255) begin out.push_back(8'd255); r -= 255; end
          out.push_back(byte'(r));
        end
        for (int k = anchor; k < i; k++) out.push_back(src[k]);
        out.push_back(byte'(best_off & 255));
        out.push_back(byte'(best_off >> 8));
        if (ml >= 15) begin
          int r = ml - 15;
          while (r >= 255) begin out.push_back(8'd255); r -= 255; end
          out.push_back(byte'(r));
        end
        i += best_len;
        anchor = i;
      end else begin
        i++;
      end
    end
    begin
      int ll = n - anchor;
      out.push_back(byte'((ll >= 15 ? 15 : ll) << 4));
      if (ll >= 15) begin
        int r = ll - 15;
        while (r >= 255) begin out.push_back(8'd255); r -= 255; end
        out.push_back(byte'(r));
      end
      for (int k = anchor; k < n; k++) out.push_back(src[k]);
    end
    return out;
  endfunction

  // stored word at plane position p of a block (KV: channel-major, exponent delta)
  function automatic shortint unsigned stored_word(input shortint unsigned blk[2048],
                                                   input bit kv, input int p);
    int c, t;
    shortint unsigned w, b;
    int d;
    if (!kv) return blk[p];
    c = p / 16;
    t = p % 16;
    w = blk[t * 128 + c];
    if (t == 0) return w;
    b = blk[c];
    d = (int'((w >> 7) & 8'hFF) - int'((b >> 7) & 8'hFF)) & 255;
    return (w & 16'h807F) | shortint'(d << 7);
  endfunction

  // expected view code of one BF16 word
  function automatic int unsigned view_code(input shortint unsigned w, input int re,
                                            input int rm, input int de, input int dm);
    bit kept[$];
    bit guard[$];
    longint unsigned k = 0;
    longint unsigned g = 0;
    int kb;
    bit rbit, sticky;
    for (int i = 0; i < re; i++) kept.push_back(w[14 - i]);
    for (int i = 0; i < rm; i++) kept.push_back(w[6 - i]);
    if (rm > 0 || re == 8) for (int i = 0; i < dm; i++) guard.push_back(w[6 - rm - i]);
    else                   for (int i = 0; i < de; i++) guard.push_back(w[14 - re - i]);
    foreach (kept[i]) k = (k << 1) | kept[i];
    kb = kept.size();
    rbit = (guard.size() > 0) ? guard[0] : 0;
    sticky = 0;
    for (int i = 1; i < guard.size(); i++) sticky |= guard[i];
    if (rbit && (sticky || k[0]) && k != ((64'd1 << kb) - 1)) k++;
    return int'((longint'(w[15]) << kb) | k);
  endfunction

endpackage
