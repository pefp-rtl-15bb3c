// pefp_host_pkg: host-side software model for the PEFP testbenches.
// host_graph holds a random directed graph and does what the host does before a query:
// Pre-BFS, i.e. a (k-1)-hop BFS from s on G and from t on the reverse graph, keeping the
// vertices u with sd(s,u) + sd(u,t) <= k; the kept vertices are renumbered 0..n-1 and the
// induced subgraph is written in CSR form (off, edg) with the barrier bar[u] = sd(u,t).
// It also enumerates every s-t simple path of at most k hops on the original graph with a
// plain depth-first search, as the reference the engine's results are compared with.
package pefp_host_pkg;

  // text key of a path, e.g. "0.7.3.1."
  function automatic string path_sig(int p[$]);
    string r = "";
    foreach (p[i]) r = {r, $sformatf("%0d.", p[i])};
    return r;
  endfunction

  class host_graph;
    int nv;
    int adj[][$];          // original graph, out-neighbours
    int radj[][$];         // reverse graph, in-neighbours (built by pre_bfs)
    // induced subgraph produced by Pre-BFS
    int sub_nv;
    int sub_of_orig[];     // original id -> new id, -1 when removed
    int orig_of_sub[$];    // new id -> original id
    int off[$];
    int edg[$];
    int bar[$];
    // reference result set: path signature -> 1
    int ref_paths[string];

    function new(int n);
      nv  = n;
      adj = new[n];
    endfunction

    // random graph: each vertex gets 0..maxdeg distinct random successors, a few hubs more
    function void randomize_graph(int maxdeg, int hubs, int hubdeg);
      for (int u = 0; u < nv; u++) begin
        int d = $urandom_range(maxdeg);
        if (u < hubs) d = hubdeg;
        adj[u].delete();
        for (int i = 0; i < d; i++) begin
          int v = $urandom_range(nv - 1);
          bit dup = 0;
          foreach (adj[u][j]) if (adj[u][j] == v) dup = 1;
          if (v != u && !dup) adj[u].push_back(v);
        end
      end
    endfunction

    // hop-limited BFS; reverse = 1 walks edges backwards
    function void bfs(int src, int limit, bit reverse, ref int dd[]);
      int q[$];
      dd = new[nv];
      foreach (dd[i]) dd[i] = -1;
      dd[src] = 0;
      q.push_back(src);
      while (q.size() > 0) begin
        int u = q.pop_front();
        if (dd[u] >= limit) continue;
        if (!reverse) begin
          foreach (adj[u][j]) if (dd[adj[u][j]] < 0) begin
            dd[adj[u][j]] = dd[u] + 1; q.push_back(adj[u][j]);
          end
        end else begin
          foreach (radj[u][j]) if (dd[radj[u][j]] < 0) begin
            dd[radj[u][j]] = dd[u] + 1; q.push_back(radj[u][j]);
          end
        end
      end
    endfunction

    // Pre-BFS and CSR build of the induced subgraph
    function void pre_bfs(int s, int t, int k);
      int sds[], sdt[];
      radj = new[nv];
      foreach (adj[u]) foreach (adj[u][j]) radj[adj[u][j]].push_back(u);
      bfs(s, k - 1, 0, sds);
      bfs(t, k - 1, 1, sdt);
      // s and t always stay; their distance may be k, beyond the (k-1)-hop searches
      if (sds[t] < 0) sds[t] = k;
      if (sdt[s] < 0) sdt[s] = k;
      sub_of_orig = new[nv];
      orig_of_sub.delete();
      for (int u = 0; u < nv; u++) begin
        sub_of_orig[u] = -1;
        if (sds[u] >= 0 && sdt[u] >= 0 && sds[u] + sdt[u] <= k) begin
          sub_of_orig[u] = orig_of_sub.size();
          orig_of_sub.push_back(u);
        end
      end
      sub_nv = orig_of_sub.size();
      off.delete(); edg.delete(); bar.delete();
      off.push_back(0);
      foreach (orig_of_sub[i]) begin
        int u = orig_of_sub[i];
        foreach (adj[u][j]) if (sub_of_orig[adj[u][j]] >= 0) edg.push_back(sub_of_orig[adj[u][j]]);
        off.push_back(edg.size());
        bar.push_back(sdt[u]);
      end
    endfunction

    function void dfs(int u, int t, int k, ref int p[$], ref bit on[]);
      foreach (adj[u][j]) begin
        int v = adj[u][j];
        if (on[v]) continue;
        if (v == t) begin
          p.push_back(v); ref_paths[path_sig(p)] = 1; void'(p.pop_back());
        end else if (p.size() < k) begin   // p.size() = hops after adding v
          p.push_back(v); on[v] = 1;
          dfs(v, t, k, p, on);
          on[v] = 0; void'(p.pop_back());
        end
      end
    endfunction

    // reference enumeration on the original graph
    function int enumerate(int s, int t, int k);
      int p[$];
      bit on[];
      on = new[nv];
      ref_paths.delete();
      p.push_back(s); on[s] = 1;
      dfs(s, t, k, p, on);
      return ref_paths.size();
    endfunction

    // does the original graph contain edge u->v
    function bit has_edge(int u, int v);
      foreach (adj[u][j]) if (adj[u][j] == v) return 1;
      return 0;
    endfunction
  endclass

endpackage
