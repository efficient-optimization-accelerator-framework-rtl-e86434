// tb_ref_pkg -- reference models shared by the testbenches.
//
// Written from the algorithm, not from the RTL: the graph-coloring F rule,
// the energy change of one spin flip computed as the difference of two full
// energies, the LFSR step, and the sigmoid table contents for a given
// temperature.
package tb_ref_pkg;

  // F(S_i, S_j): 1 for equal colors or a color outside 0..q-1
  function automatic int f_ref(input int ci, input int cj, input int q);
    return (ci == cj || ci >= q || cj >= q) ? 1 : 0;
  endfunction

  // Energy of node i against all others, with node i set to color ci
  // (weights read from row i; the other colors from col[]).
  function automatic int node_energy(input int i, input int ci, input int n,
                                     input int q, ref int col[], ref int w[]);
    int e = 0;
    for (int j = 0; j < n; j++)
      if (j != i) e += w[i*n + j] * f_ref(ci, col[j], q);
    return e;
  endfunction

  // Delta-H for spin bit k of node i: H(s_ik=1) - H(s_ik=0), before saturation
  function automatic int delta_h_ref(input int i, input int k, input int n,
                                     input int q, input int bias,
                                     ref int col[], ref int w[]);
    int c1 = col[i] | (1 << k);
    int c0 = col[i] & ~(1 << k);
    return bias + node_energy(i, c1, n, q, col, w) - node_energy(i, c0, n, q, col, w);
  endfunction

  function automatic int sat8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // One step of x^16 + x^14 + x^13 + x^11 + 1, shifting left
  function automatic logic [15:0] lfsr_step(input logic [15:0] r);
    logic fb;
    fb = r[15] ^ r[13] ^ r[12] ^ r[10];
    return {r[14:0], fb};
  endfunction

  // Sigmoid table entry for signed address a: 65535 * sigmoid(-a*scale/T)
  function automatic logic [15:0] lut_entry(input int a, input real scale, input real t);
    real p;
    p = 1.0 / (1.0 + $exp(real'(a) * scale / t));
    return 16'($rtoi(p * 65535.0 + 0.5));
  endfunction

  function automatic int ceil_log2_min1(input int q);
    int n = 1;
    while ((1 << n) < q) n++;
    return n;
  endfunction

  // Mycielski graphs: myciel2 is the 5-cycle, myciel(k+1) adds a shadow u_i
  // for every vertex v_i (u_i adjacent to the neighbours of v_i) and one hub
  // adjacent to every u_i. myciel3..7 have 11/23/47/95/191 vertices.
  function automatic void myciel(input int k, output int n, ref int adj[]);
    int m;
    int a[];
    n = 5;
    adj = new[n*n];
    foreach (adj[x]) adj[x] = 0;
    for (int v = 0; v < 5; v++) begin
      adj[v*n + (v+1)%5] = 1;
      adj[((v+1)%5)*n + v] = 1;
    end
    for (int lvl = 3; lvl <= k; lvl++) begin
      m = 2*n + 1;
      a = new[m*m];
      foreach (a[x]) a[x] = 0;
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++)
          if (adj[i*n + j] != 0) begin
            a[i*m + j] = 1;                       // original edge
            a[(n+i)*m + j] = 1; a[j*m + n+i] = 1; // shadow of i to neighbour j
          end
      for (int i = 0; i < n; i++) begin
        a[(2*n)*m + n+i] = 1; a[(n+i)*m + 2*n] = 1;
      end
      n = m;
      adj = a;
    end
  endfunction

  // Queen graph on an r x c board: squares sharing a row, column or diagonal
  function automatic void queen(input int r, input int c, output int n, ref int adj[]);
    n = r*c;
    adj = new[n*n];
    for (int x = 0; x < n; x++)
      for (int y = 0; y < n; y++) begin
        int r1, c1, r2, c2;
        r1 = x / c; c1 = x % c; r2 = y / c; c2 = y % c;
        adj[x*n + y] = (x != y) && (r1 == r2 || c1 == c2 ||
                       (r1 - r2) == (c1 - c2) || (r1 - r2) == (c2 - c1));
      end
  endfunction

  function automatic int edge_count(input int n, ref int adj[]);
    int e = 0;
    for (int i = 0; i < n; i++)
      for (int j = i+1; j < n; j++) e += (adj[i*n + j] != 0);
    return e;
  endfunction

  // Wrongly colored edges: equal colors, or a color outside 0..q-1
  function automatic int conflicts(input int n, input int q, ref int adj[], ref int col[]);
    int e = 0;
    for (int i = 0; i < n; i++)
      for (int j = i+1; j < n; j++)
        if (adj[i*n + j] != 0) e += f_ref(col[i], col[j], q);
    return e;
  endfunction

  // Cycle-level reference of the whole sampler: same update order, same
  // random numbers, energy differences computed from full energies.
  class ref_machine;
    int n, q, nb;
    int col[];
    int w[];
    int bias[];          // index i*4 + k
    logic [15:0] lut[256];
    logic [15:0] r;
    int sat_hi = 0, sat_lo = 0, flips_up = 0, flips_down = 0, illegal = 0, updates = 0;

    function new(input int n_, input int q_);
      n = n_; q = q_; nb = ceil_log2_min1(q_);
      col = new[n]; w = new[n*n]; bias = new[n*4];
      foreach (col[x]) col[x] = 0;
      foreach (w[x]) w[x] = 0;
      foreach (bias[x]) bias[x] = 0;
      r = 16'hACE1;
    endfunction

    function void step(input int i, input int k);
      int dh, a, c;
      logic s;
      dh = delta_h_ref(i, k, n, q, bias[i*4 + k], col, w);
      if (dh > 127) sat_hi++;
      if (dh < -128) sat_lo++;
      a = sat8(dh) & 255;
      s = r < lut[a];
      r = lfsr_step(r);
      c = s ? (col[i] | (1 << k)) : (col[i] & ~(1 << k));
      if (c > col[i]) flips_up++;
      if (c < col[i]) flips_down++;
      col[i] = c;
      if (c >= q) illegal++;
      updates++;
    endfunction

    function void sweep();
      for (int i = 0; i < n; i++)
        for (int k = 0; k < nb; k++) step(i, k);
    endfunction
  endclass

endpackage
