// tb_graph_pkg: test graphs and a reference model for the accelerator
// testbenches.
//
// The graph is held as an upper-triangular adjacency matrix (each undirected
// edge once, i < j). ref_run computes, independently of the RTL, what a run
// must produce: the triangle count sum over A[i][j] = 1 of
// popcount(R_i AND C_j), the number of non-zeros, of valid slice pairs and
// of slices skipped while merging, and the hit / miss / eviction / row-slice
// line counts of the replacement policy (8-way sets, set = (k * 2^VB + j)
// mod NSETS, next-visit key {never, i', j}, free way first, then the largest
// key, lowest way on ties).
package tb_graph_pkg;

  localparam int MAXV = 512;

  bit adj [MAXV][MAXV];
  int nv;

  typedef struct {
    longint tc;
    int nnz, pairs, skipped, hit, miss, evict, row_write, row_reuse;
    int valid_row_slices, valid_col_slices;
  } ref_t;

  function automatic void clear(input int n);
    nv = n;
    for (int i = 0; i < MAXV; i++) for (int j = 0; j < MAXV; j++) adj[i][j] = 0;
  endfunction

  function automatic void add_edge(input int a, input int b);
    if (a < b) adj[a][b] = 1; else if (b < a) adj[b][a] = 1;
  endfunction

  // Random graph: each pair i < j is an edge with probability pm/1000; in
  // addition, clusters of vertices with nearby indexes are densely linked so
  // that triangles appear.
  function automatic void random_graph(input int n, input int pm, input int cluster_pm);
    clear(n);
    for (int i = 0; i < n; i++)
      for (int j = i + 1; j < n; j++) begin
        int p = (j - i < 6) ? cluster_pm : pm;
        if ($urandom_range(0, 999) < p) adj[i][j] = 1;
      end
  endfunction

  // 64-bit slice k of row i / column j.
  function automatic logic [63:0] row_slice(input int i, input int k);
    logic [63:0] s = '0;
    for (int b = 0; b < 64; b++) if (k * 64 + b < nv) s[b] = adj[i][k*64+b];
    return s;
  endfunction

  function automatic logic [63:0] col_slice(input int j, input int k);
    logic [63:0] s = '0;
    for (int b = 0; b < 64; b++) if (k * 64 + b < nv) s[b] = adj[k*64+b][j];
    return s;
  endfunction

  function automatic int nslices();
    return (nv + 63) / 64;
  endfunction

  function automatic ref_t ref_run(input int vb, input int nsets, input int rows);
    ref_t r;
    int ks = nslices();
    int nslots = nsets * 8;
    int nmats = nslots / rows;
    bit     s_v [][];
    int     s_t [][];
    longint s_key [][];
    bit     rl_v [];
    longint rl_t [];
    s_v = new[nsets]; s_t = new[nsets]; s_key = new[nsets];
    foreach (s_v[s]) begin s_v[s] = new[8]; s_t[s] = new[8]; s_key[s] = new[8]; end
    rl_v = new[nmats]; rl_t = new[nmats];
    r = '{default: 0};
    for (int i = 0; i < nv; i++)
      for (int k = 0; k < ks; k++) if (row_slice(i, k) != 0) r.valid_row_slices++;
    for (int j = 0; j < nv; j++)
      for (int k = 0; k < ks; k++) if (col_slice(j, k) != 0) r.valid_col_slices++;
    for (int i = 0; i < nv; i++) begin
      for (int j = 0; j < nv; j++) begin
        longint key;
        int ip, kr, kc;
        if (!adj[i][j]) continue;
        r.nnz++;
        key = longint'(1) << (2 * vb);
        for (ip = i + 1; ip < nv; ip++) if (adj[ip][j]) begin key = longint'(ip) * (longint'(1) << vb) + j; break; end
        // merge of the two valid-slice lists
        kr = 0; kc = 0;
        while (1) begin
          while (kr < ks && row_slice(i, kr) == 0) kr++;
          while (kc < ks && col_slice(j, kc) == 0) kc++;
          if (kr >= ks || kc >= ks) break;
          if (kr < kc) begin r.skipped++; kr++; end
          else if (kc < kr) begin r.skipped++; kc++; end
          else begin
            logic [63:0] a = row_slice(i, kr), b = col_slice(j, kr);
            int set = int'((longint'(kr) * (longint'(1) << vb) + j) % nsets);
            int tag = j * 4096 + kr;
            int way = -1, slot, m;
            for (int w = 7; w >= 0; w--) if (s_v[set][w] && s_t[set][w] == tag) way = w;
            if (way >= 0) r.hit++;
            else begin
              longint best = -1;
              r.miss++;
              for (int w = 7; w >= 0; w--) if (!s_v[set][w]) way = w;
              if (way < 0) begin
                r.evict++;
                for (int w = 0; w < 8; w++) if (s_key[set][w] > best) begin best = s_key[set][w]; way = w; end
              end
            end
            s_v[set][way] = 1; s_t[set][way] = tag; s_key[set][way] = key;
            slot = set * 8 + way;
            m = slot / rows;
            if (rl_v[m] && rl_t[m] == longint'(i) * 4096 + kr) r.row_reuse++;
            else begin r.row_write++; rl_v[m] = 1; rl_t[m] = longint'(i) * 4096 + kr; end
            r.pairs++;
            r.tc += $countones(a & b);
            kr++; kc++;
          end
        end
      end
    end
    return r;
  endfunction

  // Triangle count by brute force over vertex triples.
  function automatic longint brute_tc();
    longint t = 0;
    for (int a = 0; a < nv; a++)
      for (int b = a + 1; b < nv; b++) if (adj[a][b])
        for (int c = b + 1; c < nv; c++) if (adj[a][c] && adj[b][c]) t++;
    return t;
  endfunction

endpackage
