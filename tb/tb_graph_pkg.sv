// tb_graph_pkg: graph helpers shared by the accelerator testbenches.
//
// Graphs are undirected and kept as the upper triangle of the adjacency matrix,
// adj[i*n + j] = 1 for an edge i<j. The reference triangle count is the direct triple loop
// over i<k<j; the reference pair count is the number of (edge, slice) combinations where both
// the row slice and the column slice are non-zero. build_image produces the compressed memory
// image the accelerator reads: row pointer records, column pointer records, slice indexes and
// slice data (layout in tcim_ctrl's header). A row whose number of valid slices exceeds the
// row-buffer depth is skipped by the accelerator, so the references can leave such rows out.
package tb_graph_pkg;

  typedef struct {
    int row_base, col_base, idx_base, data_base, size;
  } layout_t;

  function automatic void random_graph(ref bit adj[], input int n, input int pct);
    adj = new[n*n];
    for (int i = 0; i < n; i++)
      for (int j = i + 1; j < n; j++) adj[i*n+j] = ($urandom_range(99) < pct);
  endfunction

  function automatic bit slice_valid(ref bit adj[], input int n, input int s, input bit is_row,
                                     input int v, input int k);
    for (int b = 0; b < s; b++) begin
      int t = k*s + b;
      if (t < n && (is_row ? adj[v*n+t] : adj[t*n+v])) return 1;
    end
    return 0;
  endfunction

  function automatic int row_slices(ref bit adj[], input int n, input int s, input int i);
    int c = 0;
    for (int k = 0; k < (n + s - 1) / s; k++) c += int'(slice_valid(adj, n, s, 1, i, k));
    return c;
  endfunction

  function automatic longint ref_tc(ref bit adj[], input int n, input int s, input int depth);
    longint c = 0;
    for (int i = 0; i < n; i++) begin
      if (row_slices(adj, n, s, i) > depth) continue;
      for (int j = i + 1; j < n; j++) if (adj[i*n+j])
        for (int k = i + 1; k < j; k++) if (adj[i*n+k] && adj[k*n+j]) c++;
    end
    return c;
  endfunction

  function automatic int ref_pairs(ref bit adj[], input int n, input int s, input int depth);
    int c = 0;
    for (int i = 0; i < n; i++) begin
      if (row_slices(adj, n, s, i) > depth) continue;
      for (int j = i + 1; j < n; j++) if (adj[i*n+j])
        for (int k = 0; k < (n + s - 1) / s; k++)
          if (slice_valid(adj, n, s, 1, i, k) && slice_valid(adj, n, s, 0, j, k)) c++;
    end
    return c;
  endfunction

  function automatic int ref_edges(ref bit adj[], input int n, input int s, input int depth);
    int c = 0;
    for (int i = 0; i < n; i++) begin
      if (row_slices(adj, n, s, i) > depth) continue;
      for (int j = i + 1; j < n; j++) c += int'(adj[i*n+j]);
    end
    return c;
  endfunction

  function automatic longint unsigned slice_word(ref bit adj[], input int n, input int s,
                                                 input bit is_row, input int v, input int k);
    longint unsigned w = 0;
    for (int b = 0; b < s; b++) begin
      int t = k*s + b;
      if (t < n && (is_row ? adj[v*n+t] : adj[t*n+v])) w[b] = 1'b1;
    end
    return w;
  endfunction

  // Entries: all rows (vertex order), then all columns; each vector's slices in index order.
  function automatic layout_t build_image(ref bit adj[], input int n, input int s,
                                          ref longint unsigned img[]);
    layout_t l;
    int ns = (n + s - 1) / s, e = 0, maxe = 0;
    for (int v = 0; v < n; v++)
      for (int k = 0; k < ns; k++)
        maxe += int'(slice_valid(adj, n, s, 1, v, k)) + int'(slice_valid(adj, n, s, 0, v, k));
    l.row_base = 0; l.col_base = n; l.idx_base = 2*n; l.data_base = 2*n + maxe;
    l.size = 2*n + 2*maxe;
    img = new[l.size];
    for (int r = 0; r < 2; r++)
      for (int v = 0; v < n; v++) begin
        int st = e;
        for (int k = 0; k < ns; k++)
          if (slice_valid(adj, n, s, r == 0, v, k)) begin
            img[l.idx_base + e]  = longint'(k);
            img[l.data_base + e] = slice_word(adj, n, s, r == 0, v, k);
            e++;
          end
        img[(r == 0 ? l.row_base : l.col_base) + v] = {32'(e - st), 32'(st)};
      end
    return l;
  endfunction

endpackage
