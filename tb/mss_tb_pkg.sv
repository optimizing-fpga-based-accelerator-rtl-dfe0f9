// Testbench package: test data and reference models.
//
// fp_of() gives every compound index a fingerprint: the test graph's own
// fingerprints for the graph nodes, otherwise a hash of the index whose bit
// density varies with the index, so that any database size can be served
// without storing it. ref_bbf() is the two-pass BitBound & folding search.
//
// build() creates N fingerprints in a few clusters, draws each node's top
// layer (each further layer with probability 1/4), picks the highest node as
// the graph entry point and gives each node random neighbour lists (up to M
// on upper layers, M..2M on layer 0) among the nodes present on that layer.
// The reference searches follow the algorithms step by step, with the same
// 12-bit score, the same tie rules and the same EF-bounded queues as the RTL,
// so their results must match exactly.
package mss_tb_pkg;
  import mss_pkg::*;

  int n_nodes, m_deg, maxdeg, nlvl, entry, entry_lvl;
  logic [FP_W-1:0] fp [];
  int level [];
  int adj [];                 // [(l * n_nodes + v) * maxdeg + j], -1 = end

  function automatic score_t tani(logic [FP_W-1:0] a, logic [FP_W-1:0] b);
    int i = $countones(a & b);
    int u = $countones(a | b);
    if (u == 0) return '0;
    if (i >= u) return '1;
    return score_t'((i * 4096) / u);
  endfunction

  function automatic void build(int n, int m, int lv);
    logic [FP_W-1:0] centre [8];
    n_nodes = n; m_deg = m; maxdeg = 2 * m; nlvl = lv;
    fp = new[n]; level = new[n]; adj = new[lv * n * maxdeg];
    for (int c = 0; c < 8; c++)
      for (int b = 0; b < FP_W; b++) centre[c][b] = ($urandom_range(99, 0) < 12);
    entry = 0; entry_lvl = 0;
    for (int v = 0; v < n; v++) begin
      logic [FP_W-1:0] x = centre[v % 8];
      for (int f = 0; f < 40; f++) x[$urandom_range(FP_W - 1, 0)] ^= 1'b1;
      fp[v] = x;
      level[v] = 0;
      while (level[v] < lv - 1 && $urandom_range(3, 0) == 0) level[v]++;
      if (level[v] > entry_lvl) begin entry = v; entry_lvl = level[v]; end
    end
    foreach (adj[i]) adj[i] = -1;
    for (int l = 0; l < lv; l++)
      for (int v = 0; v < n; v++) if (level[v] >= l) begin
        int pool[$];
        int deg;
        for (int u = 0; u < n; u++) if (u != v && level[u] >= l) pool.push_back(u);
        pool.shuffle();
        deg = (l == 0) ? $urandom_range(maxdeg, m) : $urandom_range(m, 1);
        for (int j = 0; j < deg && j < pool.size(); j++)
          adj[(l * n + v) * maxdeg + j] = pool[j];
      end
  endfunction

  function automatic logic [31:0] mix(logic [31:0] x);
    x = x ^ (x >> 16); x = x * 32'h7feb352d;
    x = x ^ (x >> 15); x = x * 32'h846ca68b;
    return x ^ (x >> 16);
  endfunction

  function automatic logic [FP_W-1:0] fp_of(int id);
    logic [FP_W-1:0] x;
    int dens;
    if (id < n_nodes) return fp[id];
    dens = 1 + (mix(id) % 3);   // roughly 1/8, 1/16 or 1/32 of the bits set
    for (int w = 0; w < FP_W / 32; w++) begin
      logic [31:0] r = mix(id * 32 + w + 1);
      logic [31:0] s = mix(r + 32'h9e3779b9);
      logic [31:0] t = mix(s + 32'h85ebca6b);
      logic [31:0] u = mix(t + 32'hc2b2ae35);
      x[w*32 +: 32] = (dens == 1) ? (r & s & t) : (dens == 2) ? (r & s & t & u) : (r & s & t & u & mix(u));
    end
    return x;
  endfunction

  function automatic logic [FP_W/8-1:0] fold8(logic [FP_W-1:0] x);
    logic [FP_W/8-1:0] r;
    r = '0;
    for (int s = 0; s < 8; s++) r |= x[s*(FP_W/8) +: FP_W/8];
    return r;
  endfunction

  // Two-pass BitBound & folding search with folding level 8.
  function automatic void ref_bbf(logic [FP_W-1:0] q, int sc, int base, int len, int k, int kr1,
                                  ref cand_t res[$], ref int kept);
    cand_t s1[$], s2[$];
    int cq = $countones(q);
    int lw = (cq * sc + 4095) / 4096;
    int up = (sc == 0) ? 2047 : (cq * 4096) / sc;
    logic [FP_W/8-1:0] qf = fold8(q);
    kept = 0;
    for (int j = base; j < base + len; j++) begin
      logic [FP_W-1:0] x = fp_of(j);
      int c = $countones(x);
      if (c >= lw && c <= up) begin
        logic [FP_W/8-1:0] xf = fold8(x);
        kept++;
        q_push(s1, '{valid: 1'b1, score: tani(qf, xf), id: id_t'(j)}, kr1);
      end
    end
    foreach (s1[i]) q_push(s2, '{valid: 1'b1, score: tani(q, fp_of(s1[i].id)), id: s1[i].id}, k);
    res.delete();
    for (int i = 0; i < k; i++) res.push_back(i < s2.size() ? s2[i] : cand_t'('0));
  endfunction

  function automatic int nb(int l, int v, int j);
    return adj[(l * n_nodes + v) * maxdeg + j];
  endfunction

  // Greedy descent from the entry point down to layer 1.
  function automatic cand_t ref_top(logic [FP_W-1:0] q, int ep, int eplvl);
    int cur = ep;
    score_t cs = tani(q, fp[ep]);
    for (int l = eplvl; l >= 1; l--) begin
      bit changed = 1;
      while (changed) begin
        int best = cur;
        score_t bs = cs;
        for (int j = 0; j < m_deg; j++) begin
          int e = nb(l, cur, j);
          if (e < 0) break;
          if (tani(q, fp[e]) > bs) begin best = e; bs = tani(q, fp[e]); end
        end
        changed = (best != cur);
        cur = best; cs = bs;
      end
    end
    return '{valid: 1'b1, score: cs, id: id_t'(cur)};
  endfunction

  function automatic void q_push(ref cand_t qq[$], input cand_t c, input int cap);
    int p = qq.size();
    for (int i = 0; i < qq.size(); i++) if (cand_better(c, qq[i])) begin p = i; break; end
    qq.insert(p, c);
    if (qq.size() > cap) void'(qq.pop_back());
  endfunction

  // Best-first base-layer search; returns the k best, padded with invalid.
  function automatic void ref_base(logic [FP_W-1:0] q, cand_t ep, int ef, int k,
                                   ref cand_t res[$], ref int expansions);
    cand_t cq[$], rq[$];
    bit visited [] = new[n_nodes];
    expansions = 0;
    q_push(cq, ep, ef); q_push(rq, ep, ef);
    visited[ep.id] = 1;
    while (cq.size() > 0) begin
      cand_t top = cq[0];
      if (top.score < rq[rq.size()-1].score) break;
      void'(cq.pop_front());
      expansions++;
      for (int j = 0; j < maxdeg; j++) begin
        int e = nb(0, top.id, j);
        if (e < 0) break;
        if (!visited[e]) begin
          cand_t c;
          visited[e] = 1;
          c = '{valid: 1'b1, score: tani(q, fp[e]), id: id_t'(e)};
          if (rq.size() < ef || c.score > rq[rq.size()-1].score) begin
            q_push(cq, c, ef);
            q_push(rq, c, ef);
          end
        end
      end
    end
    res.delete();
    for (int i = 0; i < k; i++) res.push_back(i < rq.size() ? rq[i] : cand_t'('0));
  endfunction
endpackage
