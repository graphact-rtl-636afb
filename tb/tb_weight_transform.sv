// tb_weight_transform - the weight-transformation module with a 4 x 4
// systolic array (P = 4; the module is generic in P).  The testbench holds
// the input feature buffer (one-cycle read) and the output buffer as
// behavioural memories, loads W_self and W_neigh through the host port and
// runs operations OUT[:, col_off + c] = act(A * W) with random row counts,
// K from 1 to 300 (one to three 128-lane chunks), column counts and column
// offsets (some rows straddle a 128-lane word).  Checks every written
// output value and ReLU status bit against a model, that no lane outside
// the operation's columns is written, and the rate: for K > P the stream
// takes exactly ntr * ntc * (K + P - 1) cycles (pairs back to back) and the
// fill exactly ntr * P * ceil(K/128) cycles.
module tb_weight_transform;
  import graphact_pkg::*;
  import tb_util_pkg::*;
  localparam int P = 4, W_DEPTH = 8192, X_DEPTH = 1024;
  localparam int XAW = $clog2(X_DEPTH), WAW = $clog2(W_DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, wsel = 0, relu_en = 0, busy, done;
  node_t n_rows = 0;
  logic [9:0] k_len = 0, n_cols = 0, col_off = 0;
  logic [2:0] nch_a = 0, nch_out = 0;
  logic [WAW-1:0] wbase = 0;
  logic a_re, fill_active, o_we;
  logic [XAW-1:0] a_raddr, o_waddr;
  fvec_t a_rdata, o_wdata;
  lmask_t o_wmask, o_wclip;
  logic hw_en = 0;
  host_tgt_e hw_tgt = HW_WSELF;
  logic [WAW-1:0] hw_addr = 0;
  fp32_t [P-1:0] hw_wdata = 0;
  logic [P-1:0] hw_bmask = 0;
  logic [31:0] compute_cycles, fill_cycles, pairs_done;
  int checks = 0, failures = 0, clips = 0, straddles = 0, short_k = 0;

  weight_transform #(.P(P), .W_DEPTH(W_DEPTH), .X_DEPTH(X_DEPTH)) dut (.*);

  fvec_t       xmem[X_DEPTH];
  fvec_t       omem[X_DEPTH];
  bit          owr [X_DEPTH][P_AGG];
  bit          oclp[X_DEPTH][P_AGG];
  logic [31:0] W[2][384][64];

  always @(posedge clk) begin
    if (a_re) a_rdata <= xmem[a_raddr];
    if (o_we)
      for (int l = 0; l < P_AGG; l++)
        if (o_wmask[l]) begin
          omem[o_waddr][l] = o_wdata[l]; owr[o_waddr][l] = 1; oclp[o_waddr][l] = o_wclip[l];
        end
  end

  task automatic run_op(int nr, int kk, int nc, int co, bit ws, bit relu);
    int nca, nco, ntc, ntr, base, c0, s0, f0;
    nca = (kk + 127) / 128;
    nco = (co + nc + 127) / 128;
    ntc = (nc + P - 1) / P;
    ntr = (nr + P - 1) / P;
    base = $urandom_range(0, 100);
    if (kk <= P) short_k++;
    // data
    for (int v = 0; v < nr; v++)
      for (int ch = 0; ch < nca; ch++)
        for (int l = 0; l < P_AGG; l++)
          xmem[v * nca + ch][l] = (ch * 128 + l < kk) ? rand_fp(-6, 0) : $urandom;  // padding must not matter
    for (int k = 0; k < kk; k++) for (int c = 0; c < nc; c++) W[ws][k][c] = rand_fp(-6, 0);
    for (int a = 0; a < X_DEPTH; a++) for (int l = 0; l < P_AGG; l++) owr[a][l] = 0;
    for (int k = 0; k < kk; k++)
      for (int tc = 0; tc < ntc; tc++) begin
        @(negedge clk);
        hw_en = 1; hw_tgt = ws ? HW_WNEIGH : HW_WSELF; hw_addr = WAW'(base + k * ntc + tc);
        for (int j = 0; j < P; j++) begin
          hw_wdata[j] = (tc * P + j < nc) ? W[ws][k][tc * P + j] : 32'd0;
          hw_bmask[j] = 1'b1;
        end
      end
    @(negedge clk); hw_en = 0;
    for (int tc = 0; tc < ntc; tc++)
      if (((co + tc * P) % 128) + P > 128 && (co + tc * P) % 128 != 0) straddles++;
    // run
    s0 = compute_cycles; f0 = fill_cycles;
    n_rows = node_t'(nr); k_len = 10'(kk); n_cols = 10'(nc); col_off = 10'(co);
    nch_a = 3'(nca); nch_out = 3'(nco); wsel = ws; relu_en = relu; wbase = WAW'(base);
    start = 1;
    @(negedge clk); start = 0;
    @(posedge done); #1;
    // results
    for (int v = 0; v < nr; v++)
      for (int c = 0; c < nc; c++) begin
        logic [31:0] acc, got;
        bit clip;
        int g;
        for (int k = 0; k < kk; k++)
          acc = (k == 0) ? ref_mul(xmem[v * nca + k / 128][k % 128], W[ws][k][c])
                         : ref_add(acc, ref_mul(xmem[v * nca + k / 128][k % 128], W[ws][k][c]));
        clip = relu && acc[31] && acc[30:23] != 0;
        if (clip) clips++;
        g = co + c;
        got = omem[v * nco + g / 128][g % 128];
        checks++;
        if (!owr[v * nco + g / 128][g % 128] || oclp[v * nco + g / 128][g % 128] != clip ||
            !(got == (clip ? 32'd0 : acc) || (got[30:0] == 0 && acc[30:0] == 0))) begin
          failures++;
          if (failures < 8) $display("FAIL node %0d col %0d got %h exp %h (K=%0d)", v, c, got, acc, kk);
        end
        owr[v * nco + g / 128][g % 128] = 0;
      end
    // nothing else written
    checks++;
    for (int a = 0; a < X_DEPTH; a++)
      for (int l = 0; l < P_AGG; l++)
        if (owr[a][l]) begin
          failures++; $display("FAIL stray write word %0d lane %0d", a, l);
          a = X_DEPTH; break;
        end
    // rates
    checks++;
    if (fill_cycles - f0 != ntr * P * nca) begin
      failures++; $display("FAIL fill %0d cycles exp %0d", fill_cycles - f0, ntr * P * nca);
    end
    checks++;
    if (compute_cycles - s0 != ntr * ntc * (kk + P - 1)) begin
      failures++; $display("FAIL stream %0d cycles exp %0d", compute_cycles - s0, ntr * ntc * (kk + P - 1));
    end
  endtask

  initial begin
    fork
      begin repeat (400000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_op(9, 20, 10, 0, 0, 1);
    run_op(6, 3, 7, 0, 1, 1);        // K <= P: waits for the drain
    run_op(8, 140, 12, 122, 1, 1);   // two chunks, straddled rows
    run_op(5, 4, 4, 126, 0, 0);      // K = P, single straddled tile, no ReLU
    for (int i = 0; i < 8; i++)
      run_op($urandom_range(1, 13), $urandom_range(5, 300), $urandom_range(1, 40),
             $urandom_range(0, 200), 1'($urandom_range(0, 1)), 1'($urandom_range(0, 1)));
    checks++; if (clips == 0 || straddles == 0 || short_k == 0) begin
      failures++; $display("FAIL mechanism missing: clips %0d straddles %0d short_k %0d", clips, straddles, short_k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
