// bpc_ref_pkg -- reference model of the compressed bit-stream, for the testbenches.
//
// Written procedurally and independently of the RTL: it walks the values one by
// one and appends the expected code bits (first bit first) to a bit queue. It
// covers the stream-level Zero-RLE, the bit-plane block code and the end-of-stream
// rule (pending burst sent, partial block padded by repeating its last word).
// Counters in `stats` record how often each code was produced, so a testbench can
// check that its stimulus exercised every case.
package bpc_ref_pkg;

  typedef enum int {ST_ZRUN, ST_ZONE, ST_ALL1, ST_DBP0, ST_TWO1, ST_ONE1, ST_RAW,
                    ST_BURST_SPLIT, ST_BLOCK, ST_PARTIAL, ST_NUM} stat_e;
  int unsigned stats [ST_NUM];

  function automatic int unsigned imax(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

  function automatic void clear_stats();
    foreach (stats[i]) stats[i] = 0;
  endfunction

  // append the low `len` bits of v, most significant first
  function automatic void put(ref bit q[$], input longint unsigned v, input int len);
    for (int i = len - 1; i >= 0; i--) q.push_back(v[i]);
  endfunction

  // code of one non-zero DBX plane
  function automatic void plane_sym(ref bit q[$], input int n,
                                    input longint unsigned dbp, input longint unsigned dbx);
    int pw = n - 1;
    int qw = imax(1, $clog2(n - 1));
    longint unsigned all1 = (64'd1 << pw) - 1;
    int c = 0, lo = -1;
    for (int j = 0; j < pw; j++)
      if (dbx[j]) begin
        c++;
        if (lo < 0) lo = j;
      end
    if (dbx == all1) begin
      put(q, 0, 5); stats[ST_ALL1]++;
    end else if (dbp == 0) begin
      put(q, 1, 5); stats[ST_DBP0]++;
    end else if (c == 2 && dbx[lo+1]) begin
      put(q, 2, 5); put(q, lo, qw); stats[ST_TWO1]++;
    end else if (c == 1) begin
      put(q, 3, 5); put(q, lo, qw); stats[ST_ONE1]++;
    end else begin
      put(q, 1, 1); put(q, dbx, pw); stats[ST_RAW]++;
    end
  endfunction

  // code of one block; fewer than n words are padded by repeating the last
  function automatic void encode_block(ref bit q[$], input int m, input int n,
                                       input longint unsigned words[$]);
    longint unsigned w[$];
    longint unsigned d[$];
    longint unsigned dbp[$];
    int rw = imax(1, $clog2(m));
    int i;
    w = words;
    if (w.size() < n) stats[ST_PARTIAL]++;
    while (w.size() < n) w.push_back(w[w.size()-1]);
    for (int j = 0; j < n - 1; j++)
      d.push_back((w[j+1] - w[j]) & ((64'd1 << (m + 1)) - 1));
    for (int b = 0; b <= m; b++) begin
      longint unsigned p = 0;
      for (int j = 0; j < n - 1; j++) p[j] = d[j][b];
      dbp.push_back(p);
    end
    put(q, w[0], m);
    i = m;
    while (i >= 0) begin
      longint unsigned dbx = dbp[i] ^ ((i == m) ? 64'd0 : dbp[i+1]);
      if (dbx == 0) begin
        int len = 0;
        while (i - len >= 0 && ((dbp[i-len] ^ ((i - len == m) ? 64'd0 : dbp[i-len+1])) == 0))
          len++;
        if (len == 1) begin
          put(q, 1, 3); stats[ST_ZONE]++;
        end else begin
          put(q, 1, 2); put(q, len - 2, rw); stats[ST_ZRUN]++;
        end
        i -= len;
      end else begin
        plane_sym(q, n, dbp[i], dbx);
        i--;
      end
    end
    stats[ST_BLOCK]++;
  endfunction

  // expected bit-stream of a whole value stream
  function automatic void compress(ref bit q[$], input int m, input int n, input int max_zb,
                                   input longint unsigned vals[$]);
    int zbw = imax(1, $clog2(max_zb));
    int z = 0;
    longint unsigned blk[$];
    for (int k = 0; k < vals.size(); k++) begin
      bit last = (k == vals.size() - 1);
      if (vals[k] != 0) begin
        if (z > 0) begin
          put(q, 0, 1); put(q, z - 1, zbw); z = 0;
        end
        put(q, 1, 1);
        blk.push_back(vals[k]);
        if (blk.size() == n) begin
          encode_block(q, m, n, blk);
          blk.delete();
        end
      end else begin
        z++;
        if (z == max_zb || last) begin
          if (z == max_zb) stats[ST_BURST_SPLIT]++;
          put(q, 0, 1); put(q, z - 1, zbw); z = 0;
        end
      end
    end
    if (blk.size() > 0) encode_block(q, m, n, blk);
  endfunction

endpackage
