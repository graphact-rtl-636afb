// tb_mem_ctrl - the memory controller that routes the five feature buffers.
// Every cycle the testbench drives random routing (fa_src, wt_src, wt_dst)
// and random requests from the aggregation module, the weight module and the
// host (never a host read of a buffer a module reads in that cycle, and
// never two module writes to the aggregation buffer - the two situations
// the schedule excludes).  It checks each buffer's port signals against a
// model of the priority rules (read: WT > FA > host, write: WT > FA > host),
// the stall of the aggregation module when the tile fill reads its buffer,
// and that each requester gets the data of the buffer it read, one cycle
// later (the buffers' read data are random every cycle).
module tb_mem_ctrl;
  import graphact_pkg::*;
  localparam int NBUF = 5, AW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  buf_sel_e fa_src, wt_src, wt_dst, h_rsel, h_wsel;
  logic fa_re, fa_we, fa_stall, wt_fill, wt_re, wt_we, h_re, h_we;
  logic [AW-1:0] fa_raddr, fa_waddr, wt_raddr, wt_waddr, h_raddr, h_waddr;
  fvec_t fa_rdata, fa_wdata, wt_rdata, wt_wdata, h_rdata, h_wdata;
  lmask_t wt_wmask, wt_wclip, h_rclip, h_wmask;
  logic [NBUF-1:0] b_re, b_we;
  logic [NBUF-1:0][AW-1:0] b_raddr, b_waddr;
  fvec_t [NBUF-1:0] b_rdata, b_wdata;
  lmask_t [NBUF-1:0] b_rclip, b_wmask, b_wclip;
  int checks = 0, failures = 0, n_stall = 0;

  mem_ctrl #(.NBUF(NBUF), .AW(AW)) dut (.*);

  function automatic fvec_t rvec();
    fvec_t v;
    for (int l = 0; l < P_AGG; l++) v[l] = $urandom;
    return v;
  endfunction

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL %s", s);
  endtask

  initial begin
    int exp_fa, exp_wt, exp_h;
    fork
      begin repeat (100000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    {fa_re, fa_we, wt_fill, wt_re, wt_we, h_re, h_we} = '0;
    fa_src = BUF_X0; wt_src = BUF_X0; wt_dst = BUF_X1; h_rsel = BUF_X0; h_wsel = BUF_X0;
    {fa_raddr, fa_waddr, wt_raddr, wt_waddr, h_raddr, h_waddr} = '0;
    fa_wdata = '0; wt_wdata = '0; h_wdata = '0; wt_wmask = '0; wt_wclip = '0; h_wmask = '0;
    b_rdata = '0; b_rclip = '0;
    exp_fa = -1; exp_wt = -1; exp_h = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      // read data of the previous cycle's reads, as the buffers return them
      for (int b = 0; b < NBUF; b++) begin b_rdata[b] = rvec(); b_rclip[b] = lmask_t'({$urandom, $urandom, $urandom, $urandom}); end
      #1;
      if (exp_fa >= 0) begin checks++; if (fa_rdata != b_rdata[exp_fa]) fail("fa data"); end
      if (exp_wt >= 0) begin checks++; if (wt_rdata != b_rdata[exp_wt]) fail("wt data"); end
      if (exp_h >= 0) begin
        checks++; if (h_rdata != b_rdata[exp_h] || h_rclip != b_rclip[exp_h]) fail("host data");
      end
      // new requests
      fa_src = buf_sel_e'($urandom_range(0, 1)); wt_src = buf_sel_e'($urandom_range(0, 3));
      wt_dst = buf_sel_e'($urandom_range(1, 4));
      fa_re = $urandom_range(0, 1); wt_fill = $urandom_range(0, 1); wt_re = wt_fill && $urandom_range(0, 1);
      fa_we = $urandom_range(0, 1); wt_we = $urandom_range(0, 1);
      if (wt_dst == BUF_AGG) fa_we = 0;
      h_re = $urandom_range(0, 1); h_rsel = buf_sel_e'($urandom_range(0, 4));
      h_we = $urandom_range(0, 1); h_wsel = buf_sel_e'($urandom_range(0, 4));
      fa_raddr = AW'($urandom); fa_waddr = AW'($urandom); wt_raddr = AW'($urandom);
      wt_waddr = AW'($urandom); h_raddr = AW'($urandom); h_waddr = AW'($urandom);
      fa_wdata = rvec(); wt_wdata = rvec(); h_wdata = rvec();
      wt_wmask = lmask_t'({$urandom, $urandom, $urandom, $urandom}); wt_wclip = ~wt_wmask;
      h_wmask = lmask_t'({$urandom, $urandom, $urandom, $urandom});
      #1;
      if (h_re && ((fa_re && !fa_stall && fa_src == h_rsel) || (wt_re && wt_src == h_rsel))) h_re = 0;
      #1;
      // model
      checks++;
      if (fa_stall != (wt_fill && wt_src == fa_src)) fail("stall");
      if (fa_stall && fa_re) n_stall++;
      for (int b = 0; b < NBUF; b++) begin
        logic re_e, we_e;
        logic [AW-1:0] ra_e, wa_e;
        fvec_t wd_e;
        lmask_t wm_e, wc_e;
        re_e = 0; ra_e = '0; we_e = 0; wa_e = '0; wd_e = '0; wm_e = '0; wc_e = '0;
        if (wt_re && int'(wt_src) == b) begin re_e = 1; ra_e = wt_raddr; end
        else if (fa_re && !fa_stall && int'(fa_src) == b) begin re_e = 1; ra_e = fa_raddr; end
        else if (h_re && int'(h_rsel) == b) begin re_e = 1; ra_e = h_raddr; end
        if (wt_we && int'(wt_dst) == b) begin we_e = 1; wa_e = wt_waddr; wd_e = wt_wdata; wm_e = wt_wmask; wc_e = wt_wclip; end
        else if (fa_we && b == int'(BUF_AGG)) begin we_e = 1; wa_e = fa_waddr; wd_e = fa_wdata; wm_e = '1; end
        else if (h_we && int'(h_wsel) == b) begin we_e = 1; wa_e = h_waddr; wd_e = h_wdata; wm_e = h_wmask; end
        checks++;
        if (b_re[b] != re_e || (re_e && b_raddr[b] != ra_e)) fail($sformatf("read port %0d", b));
        checks++;
        if (b_we[b] != we_e || (we_e && (b_waddr[b] != wa_e || b_wdata[b] != wd_e ||
            b_wmask[b] != wm_e || b_wclip[b] != wc_e))) fail($sformatf("write port %0d", b));
      end
      exp_fa = (fa_re && !fa_stall) ? int'(fa_src) : -1;
      exp_wt = wt_re ? int'(wt_src) : -1;
      exp_h  = h_re ? int'(h_rsel) : -1;
    end
    checks++; if (n_stall == 0) fail("no stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
