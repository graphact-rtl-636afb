// tb_util_pkg - reference arithmetic and the host-side graph preparation used
// by the testbenches.
//
// ref_add/ref_mul compute an FP32 sum/product through double precision and a
// single rounding to FP32 (written out here, round to nearest even); for one
// add or multiply of two FP32 values this equals the correctly rounded
// result, so it is an independent model of the RTL operators (valid while no
// denormal occurs).
//
// The graph part models what the host CPU does before a minibatch:
// build a random undirected subgraph, then run rounds of redundancy
// reduction - count, for every node pair {u,w}, how many neighbour lists
// contain both (the aggregation graph), pick a greedy matching of pairs with
// count > theta in decreasing count order, and replace each matched pair in
// the lists that contain it by one new node whose vector is the pair's sum.
// The result is the pair list (pu, pv) and the reduced neighbour lists.
package tb_util_pkg;

  // FP32 bits -> real (exact, through the double format)
  function automatic real fp2real(logic [31:0] b);
    logic [63:0] d;
    if (b[30:23] == 8'd0) return 0.0;
    d = {b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // real -> FP32 bits, round to nearest even; results below the normal
  // range become signed zero, as in the RTL (flush to zero)
  function automatic logic [31:0] real2fp(real r);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC0_0000 : {d[63], 8'hFF, 23'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // one correctly rounded FP32 operation: exact or double-precision result
  // (53 >= 2*24+2 bits, so the second rounding is innocuous)
  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    return real2fp(fp2real(a) + fp2real(b));
  endfunction

  function automatic logic [31:0] ref_mul(logic [31:0] a, logic [31:0] b);
    return real2fp(fp2real(a) * fp2real(b));
  endfunction

  function automatic logic [31:0] to_fp(real r);
    return real2fp(r);
  endfunction

  // random value m * 2^e with a 12-bit integer m and a small exponent range
  function automatic logic [31:0] rand_fp(int emin, int emax);
    int  m, e;
    real r;
    m = int'($urandom_range(0, 4095)) - 2048;
    e = int'($urandom_range(0, emax - emin)) + emin;
    r = real'(m);
    // scale by 2^e with exact steps (a real power with a negative int
    // exponent is not evaluated reliably by every simulator)
    for (int i = 0; i < e; i++) r = r * 2.0;
    for (int i = 0; i > e; i--) r = r / 2.0;
    return real2fp(r);
  endfunction

  // ---------------------------------------------------------- graph model
  localparam int GMAX = 256;          // node index space of the model
  int n_orig;                          // |V_s|
  int n_tot;                           // |V_s| + pairs
  int nbr[GMAX][$];                    // current (reduced) neighbour lists
  int deg0[GMAX];                      // degree in the original subgraph
  int pu[$], pv[$];                    // pair list M_a, all rounds
  int rounds_done;
  int cnt_g[GMAX][GMAX];               // pair counts of the aggregation graph
  bit used_g[GMAX];

  function automatic void graph_random(int n, int extra_edges, int seed_dummy);
    bit adj[GMAX][GMAX];
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) adj[i][j] = 0;
    // a ring plus chords plus a dense cluster, to create shared pairs;
    // node n-1 stays isolated
    for (int i = 0; i < n - 2; i++) begin
      adj[i][i+1] = 1; adj[i+1][i] = 1;
    end
    for (int k = 0; k < extra_edges; k++) begin
      int a, b;
      a = int'($urandom_range(0, n - 2));
      b = int'($urandom_range(0, n - 2));
      if (a != b) begin adj[a][b] = 1; adj[b][a] = 1; end
    end
    // nodes 0..7 form a clique and nodes 8..15 see all of them: round 1
    // pairs them up, round 2 pairs the pairs, round 3 pairs those - so a
    // later-round pair uses the pair listed right before it
    for (int a = 0; a < 16 && a < n - 1; a++)
      for (int b = 0; b < 8 && b < n - 1; b++)
        if (a != b) begin adj[a][b] = 1; adj[b][a] = 1; end
    n_orig = n;
    n_tot  = n;
    pu.delete(); pv.delete();
    rounds_done = 0;
    for (int i = 0; i < GMAX; i++) nbr[i].delete();
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < n; j++) if (adj[i][j]) nbr[i].push_back(j);
      deg0[i] = nbr[i].size();
    end
    if (seed_dummy < 0) $display("unused");
  endfunction

  // graph of Fig. 2 style example: 0-1, 0-2, 0-3, 1-2, 2-3
  function automatic void graph_small();
    n_orig = 4; n_tot = 4;
    pu.delete(); pv.delete();
    rounds_done = 0;
    for (int i = 0; i < GMAX; i++) nbr[i].delete();
    nbr[0] = '{1, 2, 3};
    nbr[1] = '{0, 2};
    nbr[2] = '{0, 1, 3};
    nbr[3] = '{0, 2};
    for (int i = 0; i < 4; i++) deg0[i] = nbr[i].size();
  endfunction

  // one round of redundancy reduction; returns the number of pairs matched
  function automatic int reduce_round(int theta);
    int best, bu, bw, matched;
    for (int i = 0; i < n_tot; i++) begin
      used_g[i] = 0;
      for (int j = 0; j < n_tot; j++) cnt_g[i][j] = 0;
    end
    for (int v = 0; v < n_orig; v++)
      foreach (nbr[v][a])
        foreach (nbr[v][b])
          if (nbr[v][a] < nbr[v][b]) cnt_g[nbr[v][a]][nbr[v][b]]++;
    matched = 0;
    forever begin
      best = theta; bu = -1; bw = -1;
      for (int i = 0; i < n_tot; i++)
        for (int j = i + 1; j < n_tot; j++)
          // ties go to the later pair, so the newest pair sums pair first
          if ((cnt_g[i][j] > best || (cnt_g[i][j] == best && bu >= 0)) && !used_g[i] && !used_g[j]) begin
            best = cnt_g[i][j]; bu = i; bw = j;
          end
      if (bu < 0 || n_tot >= GMAX) break;
      used_g[bu] = 1; used_g[bw] = 1;
      pu.push_back(bu); pv.push_back(bw);
      // rewrite the lists holding both: drop bu, replace bw by the new node
      for (int v = 0; v < n_orig; v++) begin
        int iu, iw;
        iu = -1; iw = -1;
        foreach (nbr[v][a]) begin
          if (nbr[v][a] == bu) iu = a;
          if (nbr[v][a] == bw) iw = a;
        end
        if (iu >= 0 && iw >= 0) begin
          nbr[v][iw] = n_tot;
          nbr[v].delete(iu);
        end
      end
      n_tot++;
      matched++;
    end
    rounds_done++;
    return matched;
  endfunction

  function automatic int num_edges();
    int e;
    e = 0;
    for (int v = 0; v < n_orig; v++) e += nbr[v].size();
    return e;
  endfunction
endpackage
