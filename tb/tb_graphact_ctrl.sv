// tb_graphact_ctrl - the forward-pass scheduler.  The testbench stands in
// for the two computation modules: it answers every fa_start and wt_start
// with a done pulse after a random delay.  For random minibatch shapes it
// checks the order of the five steps (layer 1 a+b, layer 1 c, layer 2 a+b,
// layer 2 c, MLP), that a+b starts both modules in the same cycle, that c
// starts only after both the aggregation and the self-weight product have
// finished (in either order), every operation field (K, chunks, columns,
// column offset, weight select and base address, source and destination
// buffers), and that done follows the MLP and the step cycle counters add
// up to the measured step lengths.
module tb_graphact_ctrl;
  import graphact_pkg::*;
  localparam int P = 24, WAW = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, fa_start, fa_done = 0, wt_start, wt_done = 0;
  batch_cfg_t cfg;
  logic [2:0] fa_nch, wt_nch_a, wt_nch_out;
  buf_sel_e fa_src, wt_src, wt_dst;
  logic [9:0] wt_k, wt_ncols, wt_coloff;
  logic wt_wsel, wt_relu;
  logic [WAW-1:0] wt_wbase;
  logic [1:0] phase;
  logic [31:0] ab_cycles, c_cycles, mlp_cycles;
  int checks = 0, failures = 0, fa_last = 0, wt_last = 0;

  graphact_ctrl #(.P(P), .WAW(WAW)) dut (.*);

  int fa_delay = -1, wt_delay = -1, cyc = 0;
  // module stand-ins
  always @(posedge clk) begin
    cyc <= cyc + 1;
    fa_done <= 0; wt_done <= 0;
    if (fa_delay == 0) fa_done <= 1;
    if (wt_delay == 0) wt_done <= 1;
    if (fa_delay >= 0) fa_delay <= fa_delay - 1;
    if (wt_delay >= 0) wt_delay <= wt_delay - 1;
    if (fa_start) fa_delay <= $urandom_range(1, 40);
    if (wt_start) wt_delay <= $urandom_range(1, 40);
  end

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL %s", s);
  endtask

  task automatic expect_wt(string step, int k, int nca, int ncols, int coff, int nco, bit ws,
                           int base, buf_sel_e src, buf_sel_e dst);
    checks++;
    if (wt_k != 10'(k) || wt_nch_a != 3'(nca) || wt_ncols != 10'(ncols) || wt_coloff != 10'(coff)
        || wt_nch_out != 3'(nco) || wt_wsel != ws || wt_wbase != WAW'(base) || !wt_relu
        || wt_src != src || wt_dst != dst)
      fail($sformatf("%s fields: k %0d nca %0d cols %0d off %0d nco %0d ws %0d base %0d src %0d dst %0d",
                     step, wt_k, wt_nch_a, wt_ncols, wt_coloff, wt_nch_out, wt_wsel, wt_wbase, wt_src, wt_dst));
  endtask

  task automatic run(int f_in, int f_hid, int n_cls);
    int half, ntc, nin, nh, ncl, base2, basem, t_ab, t_c, t_m, ab0, c0, m0, ts, fa_t, wt_t;
    half = f_hid / 2; ntc = (half + P - 1) / P;
    nin = (f_in + 127) / 128; nh = (f_hid + 127) / 128; ncl = (n_cls + 127) / 128;
    base2 = f_in * ntc; basem = base2 + f_hid * ntc;
    cfg = '0; cfg.n_nodes = 14'($urandom_range(1, 4000)); cfg.n_pairs = 14'($urandom_range(0, 8000));
    cfg.f_in = 10'(f_in); cfg.f_hid = 10'(f_hid); cfg.n_cls = 10'(n_cls);
    ab0 = ab_cycles; c0 = c_cycles; m0 = mlp_cycles;
    t_ab = 0; t_c = 0; t_m = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int layer = 0; layer < 2; layer++) begin
      // step a+b
      while (!(fa_start || wt_start)) @(negedge clk);
      checks++;
      if (!(fa_start && wt_start)) fail("a and b not started together");
      if (phase != 2'd1) fail("phase a+b");
      checks++;
      if (fa_nch != 3'(layer ? nh : nin) || fa_src != (layer ? BUF_X1 : BUF_X0)) fail("fa fields");
      expect_wt("b", layer ? f_hid : f_in, layer ? nh : nin, half, 0, nh, 0, layer ? base2 : 0,
                layer ? BUF_X1 : BUF_X0, layer ? BUF_X2 : BUF_X1);
      ts = cyc; fa_t = -1; wt_t = -1;
      @(negedge clk);
      // step c must wait for both
      while (!wt_start) begin
        if (fa_done) fa_t = cyc;
        if (wt_done) wt_t = cyc;
        @(negedge clk);
      end
      checks++;
      if (fa_t < 0 || wt_t < 0) fail("c started before a and b finished");
      if (fa_t > wt_t) fa_last++; else wt_last++;
      t_ab += cyc - ts - 1;
      if (phase != 2'd2) fail("phase c");
      expect_wt("c", layer ? f_hid : f_in, layer ? nh : nin, half, half, nh, 1, layer ? base2 : 0,
                BUF_AGG, layer ? BUF_X2 : BUF_X1);
      ts = cyc;
      @(negedge clk);
      while (!wt_done) begin
        checks++; if (fa_start) fail("aggregation started during c");
        @(negedge clk);
      end
      t_c += cyc - ts;
    end
    // MLP
    while (!wt_start) @(negedge clk);
    checks++; if (phase != 2'd3) fail("phase mlp");
    expect_wt("mlp", f_hid, nh, n_cls, 0, ncl, 0, basem, BUF_X2, BUF_XOUT);
    ts = cyc;
    @(negedge clk);
    while (!done) @(negedge clk);
    t_m = cyc - ts - 1;
    checks++; if (busy) fail("busy after done");
    checks++;
    if (ab_cycles - ab0 != t_ab || c_cycles - c0 != t_c || mlp_cycles - m0 != t_m)
      fail($sformatf("step counters %0d/%0d/%0d measured %0d/%0d/%0d", ab_cycles - ab0, c_cycles - c0,
                     mlp_cycles - m0, t_ab, t_c, t_m));
  endtask

  initial begin
    fork
      begin repeat (200000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(50, 256, 121);    // PPI
    run(602, 256, 41);    // Reddit
    run(300, 256, 100);   // Yelp
    for (int i = 0; i < 40; i++) run($urandom_range(1, 640), 2 * $urandom_range(1, 128), $urandom_range(1, 128));
    checks++; if (fa_last == 0 || wt_last == 0) fail("both finishing orders of a and b needed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
