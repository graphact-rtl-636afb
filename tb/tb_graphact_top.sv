// tb_graphact_top - end-to-end test of the forward pass with the default
// (full-size) parameters of graphact_top.
//
// The testbench plays the host CPU: it samples a random subgraph, runs
// three rounds of redundancy reduction (theta = 2), loads X^(0), the reduced
// topology, the pair list and all weights, starts the pipeline and, when done
// pulses, reads back X^(1), X^(2), X_MLP^out and their ReLU status bits.
// Every word is compared bit-exactly (+0 and -0 count as equal) with a model
// that performs the same FP32 operations in the same order:
//   pair sums, neighbour sums in list order, scale by 1/deg, dot products
//   accumulated from k = 0 upwards, ReLU.
// Two minibatches run:
//   run 1: PPI-like widths f_in = 50, f = 256, 121 classes;
//   run 2: f_in = 200 (two 128-lane chunks) and f = 200, so that tile rows
//          straddle a 128-lane word in the neighbour half.
// Rate check: the systolic stream cycles must equal
// sum over products of ntr * ntc * (K + P - 1) (all K > P here), i.e. the
// pairs run back to back.  Mechanism counters (each must be non-zero):
// aggregation stalls by the tile fill, pair hazards, ReLU clips, a
// zero-degree node, a multi-chunk aggregation, straddled output rows.
module tb_graphact_top;
  import graphact_pkg::*;
  import tb_util_pkg::*;

  localparam int P    = P_SYS;
  localparam int NMAX = 64;
  localparam int FMAX = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  batch_cfg_t cfg;
  logic       start, busy, done;
  logic       h_we, h_re;
  host_tgt_e  h_tgt;
  logic [CNT_W-1:0] h_addr;
  fvec_t      h_wdata, h_rdata;
  lmask_t     h_wmask, h_rclip;
  buf_sel_e   h_rsel;
  logic [13:0] h_raddr;
  logic [31:0] fa_stall_cycles, fa_hazard_waits, wt_compute_cycles, wt_fill_cycles, wt_pairs;
  logic [31:0] ab_cycles, c_cycles, mlp_cycles;
  logic [1:0]  phase;

  graphact_top dut (.*);

  int checks = 0, failures = 0;
  int n_clip = 0, n_zero_deg = 0, n_multichunk = 0, n_straddle = 0, n_ab = 0;

  // ------------------------------------------------------------- model data
  logic [31:0] x0 [NMAX][FMAX];
  logic [31:0] xin[NMAX][FMAX];
  logic [31:0] agg[NMAX][FMAX];
  logic [31:0] xm [2*GMAX][FMAX];
  logic [31:0] x1 [NMAX][FMAX];
  logic [31:0] x2 [NMAX][FMAX];
  logic [31:0] xo [NMAX][FMAX];
  bit          c1 [NMAX][FMAX];
  bit          c2 [NMAX][FMAX];
  bit          co [NMAX][FMAX];
  logic [31:0] wts[5][FMAX][FMAX];   // 0: W1 self, 1: W1 neigh, 2: W2 self, 3: W2 neigh, 4: MLP
  logic [31:0] dot_out[NMAX][FMAX];
  bit          dot_clip[NMAX][FMAX];

  function automatic bit fp_eq(logic [31:0] a, logic [31:0] b);
    return (a == b) || (a[30:0] == 0 && b[30:0] == 0);
  endfunction

  function automatic logic [31:0] val(int i, int k);
    return (i < n_orig) ? xin[i][k] : xm[i - n_orig][k];
  endfunction

  // aggregation model on xin, result in agg
  function automatic void model_agg(int f);
    for (int m = 0; m < pu.size(); m++)
      for (int k = 0; k < f; k++) xm[m][k] = ref_add(val(pu[m], k), val(pv[m], k));
    for (int v = 0; v < n_orig; v++)
      for (int k = 0; k < f; k++) begin
        logic [31:0] acc;
        if (nbr[v].size() == 0) agg[v][k] = 32'd0;
        else begin
          acc = val(nbr[v][0], k);
          for (int e = 1; e < nbr[v].size(); e++) acc = ref_add(acc, val(nbr[v][e], k));
          agg[v][k] = ref_mul(acc, to_fp(1.0 / real'(deg0[v])));
        end
      end
  endfunction

  // dot_out[v][c] = ReLU(sum_k a[v][k] * W[k][c]); src 0: xin, 1: agg
  function automatic void model_dot(int src, int widx, int kk, int ncols);
    for (int v = 0; v < n_orig; v++)
      for (int c = 0; c < ncols; c++) begin
        logic [31:0] acc, a;
        for (int k = 0; k < kk; k++) begin
          a = src ? agg[v][k] : xin[v][k];
          if (k == 0) acc = ref_mul(a, wts[widx][k][c]);
          else        acc = ref_add(acc, ref_mul(a, wts[widx][k][c]));
        end
        dot_clip[v][c] = acc[31] && acc[30:23] != 0;
        dot_out[v][c]  = dot_clip[v][c] ? 32'd0 : acc;
      end
  endfunction

  // ------------------------------------------------------------- host I/O
  task automatic hwrite(host_tgt_e tgt, int addr, fvec_t data, lmask_t mask);
    @(negedge clk);
    h_we = 1; h_tgt = tgt; h_addr = CNT_W'(addr); h_wdata = data; h_wmask = mask;
    @(negedge clk);
    h_we = 0;
  endtask

  task automatic hread(buf_sel_e sel, int addr, output fvec_t data, output lmask_t clip);
    @(negedge clk);
    h_re = 1; h_rsel = sel; h_raddr = 14'(addr);
    @(negedge clk);
    h_re = 0;
    data = h_rdata; clip = h_rclip;
  endtask

  task automatic write_weights(host_tgt_e tgt, int base, int widx, int kk, int ncols);
    int ntc;
    ntc = (ncols + P - 1) / P;
    for (int k = 0; k < kk; k++)
      for (int tc = 0; tc < ntc; tc++) begin
        fvec_t  d;
        lmask_t msk;
        d = '0; msk = '0;
        for (int j = 0; j < P; j++)
          if (tc * P + j < ncols) begin
            d[j] = wts[widx][k][tc * P + j]; msk[j] = 1'b1;
          end
        hwrite(tgt, base + k * ntc + tc, d, msk);
      end
  endtask

  // compare a buffer holding rows [v][0..f) against model arrays
  task automatic check_buf(buf_sel_e sel, int f, string name, ref logic [31:0] exp_v[NMAX][FMAX],
                           ref bit exp_c[NMAX][FMAX]);
    int nch, bad;
    nch = (f + 127) / 128;
    bad = 0;
    for (int v = 0; v < n_orig; v++)
      for (int ch = 0; ch < nch; ch++) begin
        fvec_t  d;
        lmask_t cl;
        hread(sel, v * nch + ch, d, cl);
        for (int l = 0; l < 128 && ch * 128 + l < f; l++) begin
          checks++;
          if (!fp_eq(d[l], exp_v[v][ch * 128 + l]) || cl[l] != exp_c[v][ch * 128 + l]) begin
            failures++;
            if (bad < 5)
              $display("MISMATCH %s node %0d feat %0d: got %h/%b exp %h/%b", name, v,
                       ch * 128 + l, d[l], cl[l], exp_v[v][ch * 128 + l], exp_c[v][ch * 128 + l]);
            bad++;
          end
          if (exp_c[v][ch * 128 + l]) n_clip++;
        end
      end
  endtask

  // ------------------------------------------------------------- one run
  task automatic run_batch(int n, int f_in, int f_hid, int n_cls, int chords);
    int half, ntc_h, base_l2, base_mlp, nch_in, ntr, exp_stream, exp_pairs, npairs;
    int stream0, pairs0, stall0, haz0, nedges;
    int col_ptr;
    half     = f_hid / 2;
    ntc_h    = (half + P - 1) / P;
    base_l2  = f_in * ntc_h;
    base_mlp = base_l2 + f_hid * ntc_h;
    nch_in   = (f_in + 127) / 128;
    ntr      = (n + P - 1) / P;

    // graph and reduction (the host's job)
    graph_random(n, chords, 0);
    for (int r = 0; r < 3; r++) void'(reduce_round(2));
    npairs = pu.size();
    nedges = num_edges();
    for (int m = 1; m < npairs; m++)
      if (pu[m] == n + m - 1 || pv[m] == n + m - 1) n_ab++;
    $display("run n=%0d f_in=%0d f=%0d cls=%0d: %0d pairs, %0d edges after reduction",
             n, f_in, f_hid, n_cls, npairs, nedges);
    for (int v = 0; v < n; v++) if (deg0[v] == 0) n_zero_deg++;
    if (nch_in > 1) n_multichunk++;
    for (int tc = 0; tc < ntc_h; tc++)
      if (((half + tc * P) % 128) + ((tc * P + P <= half) ? P : half - tc * P) > 128) n_straddle++;

    // data
    for (int v = 0; v < n; v++)
      for (int k = 0; k < FMAX; k++) x0[v][k] = (k < f_in) ? rand_fp(-9, -5) : 32'd0;
    for (int w = 0; w < 5; w++)
      for (int k = 0; k < FMAX; k++)
        for (int c = 0; c < FMAX; c++) wts[w][k][c] = rand_fp(-13, -9);

    // load
    for (int v = 0; v < n; v++)
      for (int ch = 0; ch < nch_in; ch++) begin
        fvec_t d;
        for (int l = 0; l < 128; l++) d[l] = x0[v][ch * 128 + l];
        hwrite(HW_X0, v * nch_in + ch, d, '1);
      end
    col_ptr = 0;
    for (int v = 0; v < n; v++) begin
      fvec_t d;
      foreach (nbr[v][e]) begin
        d = '0; d[0] = 32'(nbr[v][e]);
        hwrite(HW_COLIDX, col_ptr, d, '1);
        col_ptr++;
      end
      d = '0; d[0] = 32'(col_ptr);
      hwrite(HW_ENDPTR, v, d, '1);
      d = '0; d[0] = (deg0[v] > 0) ? to_fp(1.0 / real'(deg0[v])) : 32'd0;
      hwrite(HW_DINV, v, d, '1);
    end
    for (int m = 0; m < npairs; m++) begin
      fvec_t d;
      d = '0; d[0] = 32'({pv[m][13:0], pu[m][13:0]});
      hwrite(HW_PAIR, m, d, '1);
    end
    write_weights(HW_WSELF,  0,        0, f_in,  half);
    write_weights(HW_WNEIGH, 0,        1, f_in,  half);
    write_weights(HW_WSELF,  base_l2,  2, f_hid, half);
    write_weights(HW_WNEIGH, base_l2,  3, f_hid, half);
    write_weights(HW_WSELF,  base_mlp, 4, f_hid, n_cls);

    // model
    for (int v = 0; v < n; v++) for (int k = 0; k < FMAX; k++) xin[v][k] = x0[v][k];
    model_agg(f_in);
    model_dot(0, 0, f_in, half);
    for (int v = 0; v < n; v++) for (int c = 0; c < half; c++) begin
      x1[v][c] = dot_out[v][c]; c1[v][c] = dot_clip[v][c];
    end
    model_dot(1, 1, f_in, half);
    for (int v = 0; v < n; v++) for (int c = 0; c < half; c++) begin
      x1[v][half + c] = dot_out[v][c]; c1[v][half + c] = dot_clip[v][c];
    end
    for (int v = 0; v < n; v++) for (int k = 0; k < FMAX; k++) xin[v][k] = x1[v][k];
    model_agg(f_hid);
    model_dot(0, 2, f_hid, half);
    for (int v = 0; v < n; v++) for (int c = 0; c < half; c++) begin
      x2[v][c] = dot_out[v][c]; c2[v][c] = dot_clip[v][c];
    end
    model_dot(1, 3, f_hid, half);
    for (int v = 0; v < n; v++) for (int c = 0; c < half; c++) begin
      x2[v][half + c] = dot_out[v][c]; c2[v][half + c] = dot_clip[v][c];
    end
    for (int v = 0; v < n; v++) for (int k = 0; k < FMAX; k++) xin[v][k] = x2[v][k];
    model_dot(0, 4, f_hid, n_cls);
    for (int v = 0; v < n; v++) for (int c = 0; c < n_cls; c++) begin
      xo[v][c] = dot_out[v][c]; co[v][c] = dot_clip[v][c];
    end

    // run
    stream0 = wt_compute_cycles; pairs0 = wt_pairs; stall0 = fa_stall_cycles;
    haz0 = fa_hazard_waits;
    cfg.n_nodes = 14'(n); cfg.n_pairs = 14'(npairs);
    cfg.f_in = 10'(f_in); cfg.f_hid = 10'(f_hid); cfg.n_cls = 10'(n_cls);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    @(posedge done);
    @(negedge clk);

    exp_pairs  = 4 * ntr * ntc_h + ntr * ((n_cls + P - 1) / P);
    exp_stream = 2 * ntr * ntc_h * (f_in + P - 1) + 2 * ntr * ntc_h * (f_hid + P - 1)
               + ntr * ((n_cls + P - 1) / P) * (f_hid + P - 1);
    checks++;
    if (wt_pairs - pairs0 != exp_pairs) begin
      failures++; $display("FAIL tile pairs %0d exp %0d", wt_pairs - pairs0, exp_pairs);
    end
    checks++;
    if (wt_compute_cycles - stream0 != exp_stream) begin
      failures++;
      $display("FAIL stream cycles %0d exp %0d (K+P-1 per pair)", wt_compute_cycles - stream0, exp_stream);
    end
    $display("  stream %0d cycles, fill %0d, FA stalls %0d, pair hazards %0d, a+b %0d, c %0d, mlp %0d",
             wt_compute_cycles - stream0, wt_fill_cycles, fa_stall_cycles - stall0,
             fa_hazard_waits - haz0, ab_cycles, c_cycles, mlp_cycles);

    check_buf(BUF_X1, f_hid, "X1", x1, c1);
    check_buf(BUF_X2, f_hid, "X2", x2, c2);
    check_buf(BUF_XOUT, n_cls, "XOUT", xo, co);
  endtask

  initial begin
    fork
      begin
        repeat (3000000) @(posedge clk);
        $display("WATCHDOG timeout");
        failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    join_none
    start = 0; h_we = 0; h_re = 0; h_tgt = HW_X0; h_addr = '0; h_wdata = '0; h_wmask = '0;
    h_rsel = BUF_X0; h_raddr = '0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_batch(41, 50, 256, 121, 41);
    run_batch(30, 200, 200, 41, 30);

    // every mechanism must have happened
    checks++; if (fa_stall_cycles == 0) begin failures++; $display("FAIL no aggregation stall"); end
    checks++; if (fa_hazard_waits == 0) begin failures++; $display("FAIL no pair hazard"); end
    checks++; if (n_ab == 0)        begin failures++; $display("FAIL no chained pair"); end
    checks++; if (n_clip == 0)      begin failures++; $display("FAIL no ReLU clip"); end
    checks++; if (n_zero_deg == 0)  begin failures++; $display("FAIL no zero-degree node"); end
    checks++; if (n_multichunk == 0) begin failures++; $display("FAIL no multi-chunk input"); end
    checks++; if (n_straddle == 0)  begin failures++; $display("FAIL no straddled row"); end
    $display("mechanisms: stalls=%0d hazards=%0d chained_pairs=%0d clips=%0d zero_deg=%0d multichunk=%0d straddle=%0d",
             fa_stall_cycles, fa_hazard_waits, n_ab, n_clip, n_zero_deg, n_multichunk, n_straddle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
