// graph_tb_pkg: host-side helpers for the accelerator testbenches.
//
// preprocess() is the offline step that prepares a graph for the accelerator:
// it cuts the adjacency matrix into C x C windows, drops all-zero windows,
// counts how often each distinct window (pattern) occurs, ranks patterns by
// frequency, marks the N*M most frequent as static
// (pattern of rank r goes to engine r % N, crossbar r / N, so they spread
// evenly across the static engines) and emits
//   ct  one configuration-table entry per pattern, in rank order
//   st  one subgraph-table entry per non-empty window, in column-major order
//       (all windows of one destination block together) or row-major order.
// ref_bfs() and ref_sum() are independent reference models of the results.
package graph_tb_pkg;
  import graph_pkg::*;

  function automatic pattern_t window(const ref bit adj[], input int nv,
                                      input int sb, input int db);
    pattern_t p;
    for (int i = 0; i < C; i++)
      for (int j = 0; j < C; j++)
        p[i][j] = adj[(sb*C + i)*nv + db*C + j];
    return p;
  endfunction

  function automatic void preprocess(const ref bit adj[], input int nv,
                                     input int N, input int M, input bit row_major,
                                     ref ct_entry_t ct[$], ref st_entry_t st[$]);
    pattern_t pats[$];
    int       freq[$];
    int       sub_sb[$], sub_db[$], sub_p[$];
    int       order[$];
    int       rank[];
    int       nb = nv / C;
    ct.delete();
    st.delete();
    for (int a = 0; a < nb; a++)
      for (int b = 0; b < nb; b++) begin
        int sb = row_major ? a : b;
        int db = row_major ? b : a;
        pattern_t p = window(adj, nv, sb, db);
        int idx = -1;
        if (p == '0) continue;
        foreach (pats[k]) if (pats[k] == p) idx = k;
        if (idx < 0) begin
          pats.push_back(p);
          freq.push_back(0);
          idx = pats.size() - 1;
        end
        freq[idx]++;
        sub_sb.push_back(sb);
        sub_db.push_back(db);
        sub_p.push_back(idx);
      end
    // rank: repeatedly take the most frequent remaining pattern
    rank = new[pats.size()];
    foreach (pats[k]) order.push_back(k);
    for (int r = 0; r < pats.size(); r++) begin
      int best = r;
      for (int k = r + 1; k < pats.size(); k++)
        if (freq[order[k]] > freq[order[best]]) best = k;
      begin
        int t = order[r]; order[r] = order[best]; order[best] = t;
      end
    end
    foreach (order[r]) rank[order[r]] = r;
    foreach (order[r]) begin
      ct_entry_t e;
      e.pattern   = pats[order[r]];
      for (int i = 0; i < C; i++) e.row_mask[i] = |e.pattern[i];
      e.is_static = (r < N * M);
      e.ge        = GE_W'(e.is_static ? r % N : 0);
      e.cb        = CB_W'(e.is_static ? r / N : 0);
      ct.push_back(e);
    end
    foreach (sub_p[s]) begin
      st_entry_t e;
      e.src_blk = BLK_W'(sub_sb[s]);
      e.dst_blk = BLK_W'(sub_db[s]);
      e.pat     = PAT_W'(rank[sub_p[s]]);
      st.push_back(e);
    end
  endfunction

  // Breadth-first levels from `root`; unreachable vertices stay INF.
  function automatic void ref_bfs(const ref bit adj[], input int nv, input int root,
                                  ref int level[]);
    int q[$];
    level = new[nv];
    foreach (level[v]) level[v] = int'(INF);
    level[root] = 0;
    q.push_back(root);
    while (q.size() > 0) begin
      int u = q.pop_front();
      for (int v = 0; v < nv; v++)
        if (adj[u*nv + v] && level[v] == int'(INF)) begin
          level[v] = level[u] + 1;
          q.push_back(v);
        end
    end
  endfunction

  // Gather-sum: out[v] = init[v] + sum over edges u->v of val[u] (no overflow
  // is expected for the values the testbenches use).
  function automatic void ref_sum(const ref bit adj[], input int nv,
                                  const ref int val[], const ref int init[], ref int out[]);
    out = new[nv];
    for (int v = 0; v < nv; v++) begin
      out[v] = init[v];
      for (int u = 0; u < nv; u++) if (adj[u*nv + v]) out[v] += val[u];
    end
  endfunction

endpackage
