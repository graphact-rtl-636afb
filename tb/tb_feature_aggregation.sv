// tb_feature_aggregation - the feature aggregation module on random reduced
// subgraphs.  The testbench builds a subgraph (ring, chords, a clique seen
// by a second group of nodes, one isolated node), runs three rounds of
// redundancy reduction with theta = 2, loads the reduced lists, 1/deg and
// the pair list, and provides the X buffer (one-cycle read) as a
// behavioural memory.  Each run compares every aggregated value
// (D^-1 * A_s^# * X, same FP32 operation order) bit-exactly with the model.
// Runs use one and two 128-lane chunks, with and without random stall
// cycles (the tile fill of the weight module); during a stall the X read
// data is overwritten with garbage, as the other reader would.
// Rates checked in the runs without stall: the pre-computation takes
// 2 cycles per pair plus the hazard waits, and the propagation step reads
// one neighbour index per cycle (cycles in the stream state = edges).
// Mechanisms that must occur: pair hazard waits, stall cycles, a zero-degree
// node, chained pairs (a pair using the pair listed just before it).
module tb_feature_aggregation;
  import graphact_pkg::*;
  import tb_util_pkg::*;
  localparam int NODES_MAX = 64, EDGES_MAX = 1024, PAIRS_MAX = 128;
  localparam int XM_DEPTH = 512, X_DEPTH = 512;
  localparam int XAW = $clog2(X_DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, stall = 0;
  node_t n_nodes = 0, n_pairs = 0;
  logic [2:0] nch = 0;
  logic hw_en = 0;
  host_tgt_e hw_tgt = HW_ENDPTR;
  logic [CNT_W-1:0] hw_addr = 0;
  logic [31:0] hw_data = 0;
  logic x_re, agg_we;
  logic [XAW-1:0] x_raddr, agg_waddr;
  fvec_t x_rdata, agg_wdata;
  logic [31:0] stall_cycles, hazard_waits;
  int checks = 0, failures = 0, n_chain = 0, n_zero = 0;

  feature_aggregation #(.NODES_MAX(NODES_MAX), .EDGES_MAX(EDGES_MAX), .PAIRS_MAX(PAIRS_MAX),
                        .XM_DEPTH(XM_DEPTH), .X_DEPTH(X_DEPTH)) dut (.*);

  fvec_t xmem[X_DEPTH], amem[X_DEPTH];
  logic [31:0] xv[GMAX][256], xmv[GMAX][256];
  bit stall_mode = 0;
  int pre_cyc = 0, str_cyc = 0;

  always @(posedge clk) begin
    if (x_re) x_rdata <= xmem[x_raddr];
    else if (stall) for (int l = 0; l < P_AGG; l++) x_rdata[l] <= $urandom;
    if (agg_we) amem[agg_waddr] = agg_wdata;
    if (int'(dut.st) == 2 || int'(dut.st) == 3) pre_cyc++;   // S_PRE_A, S_PRE_B
    if (int'(dut.st) == 7) str_cyc++;                         // S_STREAM
  end
  always @(negedge clk) stall <= stall_mode && ($urandom_range(0, 3) == 0);

  task automatic hw(host_tgt_e tgt, int addr, logic [31:0] d);
    @(negedge clk);
    hw_en = 1; hw_tgt = tgt; hw_addr = CNT_W'(addr); hw_data = d;
    @(negedge clk);
    hw_en = 0;
  endtask

  function automatic logic [31:0] val(int i, int k);
    return (i < n_orig) ? xv[i][k] : xmv[i - n_orig][k];
  endfunction

  task automatic run(int n, int chords, int nc, bit with_stall);
    int np, ne, ptr, pre0, str0, haz0, f;
    f = nc * 128;
    graph_random(n, chords, 0);
    for (int r = 0; r < 3; r++) void'(reduce_round(2));
    np = pu.size();
    ne = num_edges();
    for (int m = 1; m < np; m++) if (pu[m] == n + m - 1 || pv[m] == n + m - 1) n_chain++;
    for (int v = 0; v < n; v++) if (deg0[v] == 0) n_zero++;
    // load
    ptr = 0;
    for (int v = 0; v < n; v++) begin
      foreach (nbr[v][e]) begin hw(HW_COLIDX, ptr, 32'(nbr[v][e])); ptr++; end
      hw(HW_ENDPTR, v, 32'(ptr));
      hw(HW_DINV, v, deg0[v] > 0 ? to_fp(1.0 / real'(deg0[v])) : 32'd0);
    end
    for (int m = 0; m < np; m++) hw(HW_PAIR, m, 32'({pv[m][13:0], pu[m][13:0]}));
    for (int v = 0; v < n; v++)
      for (int k = 0; k < f; k++) begin
        xv[v][k] = rand_fp(-8, -2);
        xmem[v * nc + k / 128][k % 128] = xv[v][k];
      end
    for (int a = 0; a < X_DEPTH; a++) amem[a] = '1;
    // run
    pre0 = pre_cyc; str0 = str_cyc; haz0 = hazard_waits;
    stall_mode = with_stall;
    n_nodes = node_t'(n); n_pairs = node_t'(np); nch = 3'(nc);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    @(posedge done); #1;
    stall_mode = 0;
    if (!with_stall) begin
      checks++;
      if (pre_cyc - pre0 != 2 * np * nc + (hazard_waits - haz0)) begin
        failures++; $display("FAIL pre-compute %0d cycles, exp %0d", pre_cyc - pre0, 2 * np * nc + (hazard_waits - haz0));
      end
      checks++;
      if (str_cyc - str0 != ne * nc) begin
        failures++; $display("FAIL stream %0d cycles, exp %0d", str_cyc - str0, ne * nc);
      end
    end
    // model and compare
    for (int m = 0; m < np; m++)
      for (int k = 0; k < f; k++) xmv[m][k] = ref_add(val(pu[m], k), val(pv[m], k));
    for (int v = 0; v < n; v++)
      for (int k = 0; k < f; k++) begin
        logic [31:0] acc, got;
        if (nbr[v].size() == 0) acc = 32'd0;
        else begin
          acc = val(nbr[v][0], k);
          for (int e = 1; e < nbr[v].size(); e++) acc = ref_add(acc, val(nbr[v][e], k));
          acc = ref_mul(acc, to_fp(1.0 / real'(deg0[v])));
        end
        got = amem[v * nc + k / 128][k % 128];
        checks++;
        if (!(got == acc || (got[30:0] == 0 && acc[30:0] == 0))) begin
          failures++;
          if (failures < 8) $display("FAIL node %0d feat %0d got %h exp %h", v, k, got, acc);
        end
      end
    $display("run n=%0d nch=%0d stall=%0d: %0d pairs %0d edges, hazards %0d, stalls %0d",
             n, nc, with_stall, np, ne, hazard_waits - haz0, stall_cycles);
  endtask

  initial begin
    fork
      begin repeat (500000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(30, 20, 1, 0);
    run(40, 30, 2, 0);
    run(24, 10, 1, 1);
    run(36, 40, 2, 1);
    graph_small();   // tiny graph: no pair qualifies with theta = 2
    checks++; if (hazard_waits == 0) begin failures++; $display("FAIL no hazard"); end
    checks++; if (stall_cycles == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (n_chain == 0) begin failures++; $display("FAIL no chained pair"); end
    checks++; if (n_zero == 0) begin failures++; $display("FAIL no zero-degree node"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
