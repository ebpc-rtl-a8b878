// ebpc_ref_pkg: software reference model of the EBPC code, for testbenches.
//
// Written as straight-line bit-queue code, independent of the RTL structure:
// it builds the Zero-RLE and bit-plane bit streams of a word sequence symbol
// by symbol, packs bit streams into bytes (first bit into bit 0), computes
// the bit-planes of a block and counts how often each symbol class occurs.
// Conventions (shared with the RTL and documented there): code fields and
// base words most significant bit first; plane bit j belongs to delta j;
// burst field = length-1; multi-all-0 field = run-2; positions are the lower
// bit index; a partial last block is padded by repeating its last word.
package ebpc_ref_pkg;

  typedef bit bitq_t[$];
  typedef byte unsigned byteq_t[$];
  typedef int unsigned wordq_t[$];

  // Symbol class counters (same order as ebpc_pkg::sym_kind_e).
  int unsigned kind_cnt[9];

  function automatic void put(ref bitq_t q, input int unsigned v, input int len);
    for (int i = len - 1; i >= 0; i--) q.push_back(v[i]);
  endfunction

  function automatic byteq_t pack_bytes(bitq_t q);
    byteq_t r;
    byte unsigned b;
    for (int i = 0; i < q.size(); i += 8) begin
      b = 0;
      for (int k = 0; k < 8; k++) if (i + k < q.size()) b[k] = q[i+k];
      r.push_back(b);
    end
    return r;
  endfunction

  function automatic int clog2(int v);
    int r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  // Zero-RLE bit stream of a word sequence.
  function automatic bitq_t zrle_bits(wordq_t w, int maxb);
    bitq_t q;
    int zc = 0;
    int fw = clog2(maxb);
    foreach (w[i]) begin
      if (w[i] == 0) begin
        zc++;
        if (zc == maxb) begin
          q.push_back(0); put(q, zc - 1, fw); zc = 0;
        end
      end else begin
        if (zc > 0) begin
          q.push_back(0); put(q, zc - 1, fw); zc = 0;
        end
        q.push_back(1);
      end
    end
    if (zc > 0) begin
      q.push_back(0); put(q, zc - 1, fw);
    end
    return q;
  endfunction

  // Non-zero words, padded to whole blocks by repeating the last one.
  function automatic wordq_t nonzero_padded(wordq_t w, int n);
    wordq_t r;
    foreach (w[i]) if (w[i] != 0) r.push_back(w[i]);
    while (r.size() % n != 0) r.push_back(r[r.size()-1]);
    return r;
  endfunction

  // Two's complement delta of two m-bit words, as an (m+1)-bit value.
  function automatic int unsigned delta(int unsigned a, int unsigned b, int m);
    int sa, sb;
    sa = (a >= (1 << (m - 1))) ? int'(a) - (1 << m) : int'(a);
    sb = (b >= (1 << (m - 1))) ? int'(b) - (1 << m) : int'(b);
    return int'(sb - sa) & ((1 << (m + 1)) - 1);
  endfunction

  // Bit-planes (DBP) of a block: dbp[i] bit j = bit i of (blk[j+1]-blk[j]).
  function automatic wordq_t planes(wordq_t blk, int m, int n);
    wordq_t p;
    for (int i = 0; i <= m; i++) begin
      int unsigned v = 0;
      for (int j = 0; j < n - 1; j++) begin
        if ((delta(blk[j], blk[j+1], m) >> i) & 1) v |= (1 << j);
      end
      p.push_back(v);
    end
    return p;
  endfunction

  // Bit-plane code of one block (base, then planes m..0).
  function automatic void encode_block(ref bitq_t q, input wordq_t blk, input int m, input int n);
    wordq_t p = planes(blk, m, n);
    int unsigned x[];
    int pw = n - 1;
    int unsigned all1 = (1 << pw) - 1;
    int i;
    x = new[m + 1];
    for (int k = 0; k <= m; k++) x[k] = (k == m) ? p[k] : (p[k] ^ p[k+1]);
    put(q, blk[0], m); kind_cnt[1]++;
    i = m;
    while (i >= 0) begin
      int run = 0;
      while (i - run >= 0 && x[i-run] == 0) run++;
      if (run >= 2) begin
        put(q, 3'b001, 3); put(q, run - 2, clog2(m)); kind_cnt[2]++;
        i -= run;
        continue;
      end
      if (x[i] == 0) begin
        put(q, 2'b01, 2); kind_cnt[3]++;
      end else if (x[i] == all1) begin
        put(q, 5'b00000, 5); kind_cnt[4]++;
      end else if (p[i] == 0) begin
        put(q, 5'b00001, 5); kind_cnt[5]++;
      end else if ($countones(x[i]) == 2 && ((x[i] >> 1) & x[i]) != 0) begin
        int lo = 0;
        while (((x[i] >> lo) & 1) == 0) lo++;
        put(q, 5'b00010, 5); put(q, lo, clog2(n - 2)); kind_cnt[6]++;
      end else if ($countones(x[i]) == 1) begin
        int lo = 0;
        while (((x[i] >> lo) & 1) == 0) lo++;
        put(q, 5'b00011, 5); put(q, lo, clog2(n - 1)); kind_cnt[7]++;
      end else begin
        q.push_back(1); put(q, x[i], pw); kind_cnt[8]++;
      end
      i--;
    end
  endfunction

  // Bit-plane stream of a whole word sequence.
  function automatic bitq_t bpc_bits(wordq_t w, int m, int n);
    bitq_t q;
    wordq_t nz = nonzero_padded(w, n);
    for (int b = 0; b < nz.size(); b += n) begin
      wordq_t blk;
      for (int j = 0; j < n; j++) blk.push_back(nz[b+j]);
      encode_block(q, blk, m, n);
    end
    return q;
  endfunction

  function automatic void clear_counts();
    foreach (kind_cnt[k]) kind_cnt[k] = 0;
  endfunction

  // Synthetic feature-map-like data: smooth non-negative values with zero
  // regions (ReLU output). sparsity in percent, smooth = max step.
  function automatic wordq_t feature_map(int len, int sparsity, int smooth, int m);
    wordq_t w;
    int v = 1 + $urandom_range(0, (1 << (m - 2)));
    int zero_run = 0;
    for (int i = 0; i < len; i++) begin
      if (zero_run > 0) begin
        w.push_back(0); zero_run--;
      end else if ($urandom_range(0, 99) < sparsity / 4) begin
        zero_run = $urandom_range(1, 12);
        w.push_back(0); zero_run--;
      end else begin
        v += $urandom_range(0, 2 * smooth) - smooth;
        if (v < 1) v = 1;
        if (v > (1 << (m - 1)) - 1) v = (1 << (m - 1)) - 1;
        w.push_back(v);
      end
    end
    return w;
  endfunction
endpackage
