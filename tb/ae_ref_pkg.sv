// ae_ref_pkg -- reference model of the decision-tree autoencoder, used by
// the testbenches only.
//
// It works the way a software model of the trained forest would: each tree
// is walked from the root, one cut at a time (x[var] < thr goes to child
// 2n+2, otherwise to 2n+1), until a leaf is reached; the estimate stored
// there is compared with x by L1 distance. It shares no code with the RTL,
// which evaluates all cuts and all paths in parallel instead.
//
// Values are plain ints holding the signed N-bit numbers. random_forest()
// draws cuts and estimates with $urandom and, with probability 1 in
// stop_one_in per internal node, ends a branch early by giving every leaf
// below it one estimate (how a tree shorter than D is stored).
package ae_ref_pkg;

  class forest_model;
    int unsigned T, V, D, N;
    int node_var [][];   // [t][node]
    int node_thr [][];   // [t][node]
    int leaf_est [][][]; // [t][leaf][v]
    int early_leaves;    // leaves that belong to an early-stopped branch

    function new(int unsigned t, int unsigned v, int unsigned d, int unsigned n);
      T = t; V = v; D = d; N = n;
      node_var = new[T];
      node_thr = new[T];
      leaf_est = new[T];
      for (int i = 0; i < T; i++) begin
        node_var[i] = new[(1 << D) - 1];
        node_thr[i] = new[(1 << D) - 1];
        leaf_est[i] = new[1 << D];
        foreach (leaf_est[i][l]) leaf_est[i][l] = new[V];
      end
    endfunction

    function int min_val(); return -(1 << (N - 1)); endfunction
    function int max_val(); return (1 << (N - 1)) - 1; endfunction

    function int rand_val();
      return min_val() + int'($urandom_range((1 << N) - 1, 0));
    endfunction

    // Random cuts and estimates; early-stopped branches share one estimate.
    function void random_forest(int unsigned stop_one_in);
      early_leaves = 0;
      for (int t = 0; t < T; t++) begin
        for (int n = 0; n < (1 << D) - 1; n++) begin
          node_var[t][n] = int'($urandom_range(V - 1, 0));
          node_thr[t][n] = rand_val();
        end
        for (int l = 0; l < (1 << D); l++)
          for (int v = 0; v < V; v++) leaf_est[t][l][v] = rand_val();
        // Walk the nodes top-down; a stopped node copies one estimate to
        // all leaves of its subtree.
        for (int n = 0; n < (1 << D) - 1; n++) begin
          if (stop_one_in != 0 && $urandom_range(stop_one_in - 1, 0) == 0) begin
            int k, first, cnt;
            k = $clog2(n + 2) - 1;                     // level of node n
            cnt   = 1 << (D - k);                      // leaves below it
            first = (n - ((1 << k) - 1)) * cnt;        // leftmost leaf
            for (int l = first + 1; l < first + cnt; l++)
              for (int v = 0; v < V; v++) leaf_est[t][l][v] = leaf_est[t][first][v];
            early_leaves += cnt;
          end
        end
      end
    endfunction

    function int leaf_of(int t, int x[]);
      int n = 0;
      for (int k = 0; k < int'(D); k++) begin
        if (x[node_var[t][n]] < node_thr[t][n]) n = 2 * n + 2;
        else                                    n = 2 * n + 1;
      end
      return n - ((1 << D) - 1);
    endfunction

    function int tree_dist(int t, int x[]);
      int l = leaf_of(t, x);
      int s = 0;
      for (int v = 0; v < int'(V); v++) begin
        int d = x[v] - leaf_est[t][l][v];
        s += (d < 0) ? -d : d;
      end
      return s;
    endfunction

    function int score(int x[]);
      int s = 0;
      for (int t = 0; t < int'(T); t++) s += tree_dist(t, x);
      return s;
    endfunction
  endclass

  // Sign-extend the low n bits of a raw field.
  function automatic int sext(longint unsigned raw, int unsigned n);
    int r = int'(raw & ((64'd1 << n) - 1));
    if (r >= (1 << (n - 1))) r -= (1 << n);
    return r;
  endfunction

endpackage
