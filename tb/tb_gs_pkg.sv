// tb_gs_pkg: reference models used by the GenStore testbenches.
//
// Written independently of the RTL, in plain software style: hash64 with
// multiplications, minimizer extraction over a whole read, KmerIndex
// construction over a reference sequence, and the chaining recurrence with the
// shift-approximated gap penalty. The KmerIndex contents live in the
// associative array dram, which the DRAM model tb_kidx_dram serves.
package tb_gs_pkg;
  import gs_pkg::*;

  word_t dram [addr_t];          // KmerIndex image: word address -> word
  longint unsigned next_l2;      // next free level-2 word address

  function automatic logic [63:0] ref_hash64(input logic [63:0] key);
    logic [63:0] k;
    k = (key << 21) - key - 64'd1;
    k = k ^ (k >> 24);
    k = k * 64'd265;
    k = k ^ (k >> 14);
    k = k * 64'd21;
    k = k ^ (k >> 28);
    k = k * (64'd1 + (64'd1 << 31));
    return k;
  endfunction

  typedef struct {
    longint unsigned hash;
    int              pos;    // end position (0-based) of the k-mer in the sequence
  } mz_t;

  // Canonical k-mer at each position, hashed; window minimizers (smallest hash,
  // oldest on ties), each distinct position reported once, in order.
  function automatic void minimizers(input byte unsigned seq[], input int k, input int w,
                                     output mz_t out[$]);
    longint unsigned h[$];
    int              p[$];
    longint unsigned fwd, rc, mask, canon;
    int last_pos;
    out.delete();
    mask = (64'd1 << (2*k)) - 1;
    fwd = 0; rc = 0; last_pos = -1;
    for (int i = 0; i < seq.size(); i++) begin
      fwd = ((fwd << 2) | seq[i]) & mask;
      rc  = (rc >> 2) | (longint'(3 - seq[i]) << (2*(k-1)));
      if (i + 1 >= k) begin
        canon = (rc < fwd) ? rc : fwd;
        h.push_back(ref_hash64(canon));
        p.push_back(i);
        if (h.size() > w) begin void'(h.pop_front()); void'(p.pop_front()); end
        if (h.size() == w) begin
          longint unsigned mh; int mp;
          mh = h[0]; mp = p[0];
          for (int j = 1; j < w; j++) if (h[j] < mh) begin mh = h[j]; mp = p[j]; end
          if (mp != last_pos) begin
            mz_t m; m.hash = mh; m.pos = mp;
            out.push_back(m);
            last_pos = mp;
          end
        end
      end
    end
  endfunction

  // Build the two-level index of a reference: one bucket per hash value modulo
  // 2^ib, holding {count, offset}; positions stored from offset on.
  function automatic void build_index(input byte unsigned refseq[], input int k, input int w,
                                      input int ib, input addr_t l1_base, input addr_t l2_base);
    mz_t mz[$];
    int  lists [longint unsigned][$];
    minimizers(refseq, k, w, mz);
    foreach (mz[i]) lists[mz[i].hash & ((64'd1 << ib) - 1)].push_back(mz[i].pos);
    dram.delete();
    next_l2 = l2_base;
    foreach (lists[b]) begin
      dram[l1_base + addr_t'(b)] = {16'(lists[b].size()), 48'(next_l2)};
      foreach (lists[b][j]) begin
        dram[addr_t'(next_l2)] = word_t'(lists[b][j]);
        next_l2++;
      end
    end
  endfunction

  // Add extra reference positions for a bucket (used to create scattered seeds).
  function automatic void add_bucket(input longint unsigned bucket, input addr_t l1_base,
                                     input int positions[$]);
    dram[l1_base + addr_t'(bucket)] = {16'(positions.size()), 48'(next_l2)};
    foreach (positions[j]) begin
      dram[addr_t'(next_l2)] = word_t'(positions[j]);
      next_l2++;
    end
  endfunction

  typedef struct {
    longint x;
    longint y;
  } rseed_t;

  // Seeds the seed finder is expected to produce for a read, in read order.
  function automatic void find_seeds(input byte unsigned rd[], input int k, input int w,
                                     input int n, input int ib, input addr_t l1_base,
                                     output rseed_t seeds[$]);
    mz_t mz[$];
    seeds.delete();
    minimizers(rd, k, w, mz);
    foreach (mz[i]) begin
      addr_t a;
      word_t b;
      int cnt;
      if (seeds.size() >= n) break;
      a = l1_base + addr_t'(mz[i].hash & ((64'd1 << ib) - 1));
      b = dram.exists(a) ? dram[a] : '0;
      cnt = int'(b[63:48]);
      for (int j = 0; j < cnt && seeds.size() < n; j++) begin
        rseed_t s;
        s.x = longint'(dram[addr_t'(b[47:0]) + addr_t'(j)] & 64'hFFFF_FFFF);
        s.y = mz[i].pos;
        seeds.push_back(s);
      end
    end
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int ilog2(input longint unsigned v);
    int r = 0;
    while (v > 1) begin v = v >> 1; r++; end
    return r;
  endfunction

  // One chaining PE evaluation; returns 0 in ok if j cannot precede i.
  function automatic int pe_score(input longint xi, input longint yi, input longint xj,
                                  input longint yj, input int wi, input int fj, output bit ok);
    longint dx, dy, a, g, b;
    dx = xi - xj; dy = yi - yj;
    ok = (dx > 0) && (dy > 0);
    a = (dx < dy) ? dx : dy;
    if (wi < a) a = wi;
    g = (dx > dy) ? dx - dy : dy - dx;
    b = (g >>> 3) + (ilog2(g) >>> 1);
    return sat16(fj + a - b);
  endfunction

  // Chain seeds (any order; sorted here by x, stable). Returns best f(i).
  function automatic int chain_best(input rseed_t seeds_in[$], input int w, input int h);
    rseed_t s[$];
    int f[$];
    int best;
    // stable insertion sort by x
    foreach (seeds_in[i]) begin
      int p = s.size();
      while (p > 0 && s[p-1].x > seeds_in[i].x) p--;
      s.insert(p, seeds_in[i]);
    end
    best = w;
    foreach (s[i]) begin
      int fi = w;
      for (int j = i - 1; j >= 0 && j >= i - h; j--) begin
        bit ok;
        int sc;
        sc = pe_score(s[i].x, s[i].y, s[j].x, s[j].y, w, f[j], ok);
        if (ok && sc > fi) fi = sc;
      end
      f.push_back(fi);
      if (fi > best) best = fi;
    end
    return best;
  endfunction

  function automatic nm_verdict_e nm_expect(input rseed_t seeds[$], input int m, input int n,
                                            input int w, input int h, input int th,
                                            output int best);
    best = 0;
    if (seeds.size() < m)  return NM_DROP_FEW;
    if (seeds.size() >= n) return NM_HOST_MANY;
    best = chain_best(seeds, w, h);
    return (best >= th) ? NM_HOST_CHAIN : NM_DROP_CHAIN;
  endfunction

endpackage
