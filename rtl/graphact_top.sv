// graphact_top - forward-pass pipeline of the GCN training accelerator.
//
// The accelerator trains a graph convolutional network one minibatch at a
// time, where a minibatch is a small subgraph sampled by the host CPU.  The
// host also rewrites the subgraph so that node pairs shared by many
// neighbour lists are summed only once (the pair list M_a and the reduced
// adjacency A_s^#).  Everything a minibatch needs then fits on chip, and the
// pipeline runs all layers without touching external memory:
//
//   host ---> X^(0), A_s^#, D_s, M_a, weights
//            |
//   feature_aggregation (128-lane accumulator array)  --> AGG buffer
//   weight_transform   (24 x 24 systolic array, tile buffer, W_self, W_neigh)
//            |                                        --> X^(1), X^(2), X_MLP^out
//   mem_ctrl routes the five feature buffers; graphact_ctrl schedules
//   "aggregate + self-weight product" then "neighbour-weight product" for
//   each of the two layers, then the MLP layer.
//   host <--- X_MLP^out (input of the softmax, computed on the CPU)
//
// Each output buffer has a companion status-bit buffer recording where ReLU
// clipped, for the backward pass's mask().  The backward pass itself, the
// gradient buffers and the optimizer state are not part of this RTL.
//
// Interface.  Host writes (h_we, h_tgt, h_addr, h_wdata, h_wmask):
//   HW_X0      word h_addr of X^(0) (node*ceil(f_in/128) + chunk), lanes by mask;
//   HW_ENDPTR, HW_COLIDX, HW_DINV: entry h_addr of the topology, value in lane 0;
//   HW_PAIR    pair h_addr, lane 0 = {v, u} (14 bits each);
//   HW_WSELF, HW_WNEIGH: weight-bank address h_addr, lanes 0..23 = banks, mask per bank.
// Host reads (h_re, h_rsel, h_raddr) return h_rdata/h_rclip a cycle later.
// start (pulse, cfg sampled) runs the forward pass; done pulses at its end.
// Host traffic must not overlap a run.  The event counters report the
// aggregation stall and pair-hazard cycles, the systolic stream and fill
// cycles, the tile pairs computed and the cycles of each schedule step.
//
// Lint notes: rst_n is also the disable condition of the assertions, which the
// linter reports as a synchronous use of an asynchronous reset (SYNCASYNCNET);
// every flop uses it only as an asynchronous reset.
// Only the three output buffers (X^(1), X^(2), X_out) store status bits, so
// the write-clip bits of the X^(0) and AGG ports are unused.
module graphact_top
  import graphact_pkg::*;
#(
  parameter int P         = P_SYS,
  parameter int NODES_MAX = 4000,
  parameter int EDGES_MAX = 65536,
  parameter int PAIRS_MAX = 8000,
  parameter int X0_DEPTH  = 16384,   // 2750 nodes x 5 chunks (Reddit input)
  parameter int XH_DEPTH  = 8192,    // 4000 nodes x 2 chunks (hidden f = 256)
  parameter int XM_DEPTH  = 8192,    // one word per pair: 8000 pairs (PPI budget 2 x 4000 nodes)
  parameter int XO_DEPTH  = 4096,    // 4000 nodes x 1 chunk (<= 128 classes)
  parameter int W_DEPTH   = 8192,
  localparam int AW  = $clog2(X0_DEPTH),
  localparam int WAW = $clog2(W_DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  batch_cfg_t  cfg,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // host writes
  input  logic        h_we,
  input  host_tgt_e   h_tgt,
  input  logic [CNT_W-1:0] h_addr,
  input  fvec_t       h_wdata,
  input  lmask_t      h_wmask,
  // host reads
  input  logic        h_re,
  input  buf_sel_e    h_rsel,
  input  logic [AW-1:0] h_raddr,
  output fvec_t       h_rdata,
  output lmask_t      h_rclip,
  // event counters
  output logic [31:0] fa_stall_cycles,
  output logic [31:0] fa_hazard_waits,
  output logic [31:0] wt_compute_cycles,
  output logic [31:0] wt_fill_cycles,
  output logic [31:0] wt_pairs,
  output logic [31:0] ab_cycles,
  output logic [31:0] c_cycles,
  output logic [31:0] mlp_cycles,
  output logic [1:0]  phase
);
  localparam int NBUF = 5;

  // ---------------------------------------------------------- scheduler
  logic        fa_start, fa_done, fa_busy, wt_start, wt_done, wt_busy;
  logic [2:0]  fa_nch, wt_nch_a, wt_nch_out;
  buf_sel_e    fa_src, wt_src, wt_dst;
  logic [9:0]  wt_k, wt_ncols, wt_coloff;
  logic        wt_wsel, wt_relu;
  logic [WAW-1:0] wt_wbase;

  graphact_ctrl #(.P(P), .WAW(WAW)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .fa_start, .fa_nch, .fa_src, .fa_done,
    .wt_start, .wt_k, .wt_nch_a, .wt_ncols, .wt_coloff, .wt_nch_out, .wt_wsel,
    .wt_wbase, .wt_relu, .wt_src, .wt_dst, .wt_done,
    .phase, .ab_cycles, .c_cycles, .mlp_cycles);

  // ---------------------------------------------------------- FA
  logic          fa_re, fa_we, fa_stall;
  logic [AW-1:0] fa_raddr, fa_waddr;
  fvec_t         fa_rdata, fa_wdata;

  feature_aggregation #(.NODES_MAX(NODES_MAX), .EDGES_MAX(EDGES_MAX), .PAIRS_MAX(PAIRS_MAX),
                        .XM_DEPTH(XM_DEPTH), .X_DEPTH(X0_DEPTH)) u_fa (
    .clk, .rst_n, .start(fa_start), .n_nodes(cfg.n_nodes), .n_pairs(cfg.n_pairs),
    .nch(fa_nch), .busy(fa_busy), .done(fa_done), .stall(fa_stall),
    .hw_en(h_we), .hw_tgt(h_tgt), .hw_addr(h_addr), .hw_data(h_wdata[0]),
    .x_re(fa_re), .x_raddr(fa_raddr), .x_rdata(fa_rdata),
    .agg_we(fa_we), .agg_waddr(fa_waddr), .agg_wdata(fa_wdata),
    .stall_cycles(fa_stall_cycles), .hazard_waits(fa_hazard_waits));

  // ---------------------------------------------------------- WT
  logic          wt_re, wt_fill, wt_we;
  logic [AW-1:0] wt_raddr, wt_waddr;
  fvec_t         wt_rdata, wt_wdata;
  lmask_t        wt_wmask, wt_wclip;

  weight_transform #(.P(P), .W_DEPTH(W_DEPTH), .X_DEPTH(X0_DEPTH)) u_wt (
    .clk, .rst_n, .start(wt_start), .n_rows(cfg.n_nodes), .k_len(wt_k), .nch_a(wt_nch_a),
    .n_cols(wt_ncols), .col_off(wt_coloff), .nch_out(wt_nch_out), .wsel(wt_wsel),
    .wbase(wt_wbase), .relu_en(wt_relu), .busy(wt_busy), .done(wt_done),
    .a_re(wt_re), .a_raddr(wt_raddr), .a_rdata(wt_rdata), .fill_active(wt_fill),
    .o_we(wt_we), .o_waddr(wt_waddr), .o_wmask(wt_wmask), .o_wdata(wt_wdata), .o_wclip(wt_wclip),
    .hw_en(h_we), .hw_tgt(h_tgt), .hw_addr(h_addr[WAW-1:0]), .hw_wdata(h_wdata[P-1:0]),
    .hw_bmask(h_wmask[P-1:0]),
    .compute_cycles(wt_compute_cycles), .fill_cycles(wt_fill_cycles), .pairs_done(wt_pairs));

  // ---------------------------------------------------------- buffers
  logic   [NBUF-1:0]         b_re, b_we;
  logic   [NBUF-1:0][AW-1:0] b_raddr, b_waddr;
  fvec_t  [NBUF-1:0]         b_rdata, b_wdata;
  lmask_t [NBUF-1:0]         b_rclip, b_wmask, b_wclip;

  mem_ctrl #(.NBUF(NBUF), .AW(AW)) u_mem (
    .clk, .rst_n, .fa_src, .wt_src, .wt_dst,
    .fa_re, .fa_raddr, .fa_rdata, .fa_stall, .fa_we, .fa_waddr, .fa_wdata,
    .wt_fill, .wt_re, .wt_raddr, .wt_rdata, .wt_we, .wt_waddr, .wt_wmask, .wt_wdata, .wt_wclip,
    .h_re, .h_rsel, .h_raddr, .h_rdata, .h_rclip,
    .h_we(h_we && h_tgt == HW_X0), .h_wsel(BUF_X0), .h_waddr(h_addr[AW-1:0]),
    .h_wmask, .h_wdata,
    .b_re, .b_raddr, .b_rdata, .b_rclip, .b_we, .b_waddr, .b_wmask, .b_wdata, .b_wclip);

  localparam int HAW = $clog2(XH_DEPTH);
  localparam int OAW = $clog2(XO_DEPTH);

  feature_buffer #(.DEPTH(X0_DEPTH)) u_x0 (
    .clk, .we(b_we[BUF_X0]), .waddr(b_waddr[BUF_X0]), .wmask(b_wmask[BUF_X0]),
    .wdata(b_wdata[BUF_X0]), .re(b_re[BUF_X0]), .raddr(b_raddr[BUF_X0]), .rdata(b_rdata[BUF_X0]));
  feature_buffer #(.DEPTH(XH_DEPTH)) u_x1 (
    .clk, .we(b_we[BUF_X1]), .waddr(b_waddr[BUF_X1][HAW-1:0]), .wmask(b_wmask[BUF_X1]),
    .wdata(b_wdata[BUF_X1]), .re(b_re[BUF_X1]), .raddr(b_raddr[BUF_X1][HAW-1:0]),
    .rdata(b_rdata[BUF_X1]));
  feature_buffer #(.DEPTH(XH_DEPTH)) u_x2 (
    .clk, .we(b_we[BUF_X2]), .waddr(b_waddr[BUF_X2][HAW-1:0]), .wmask(b_wmask[BUF_X2]),
    .wdata(b_wdata[BUF_X2]), .re(b_re[BUF_X2]), .raddr(b_raddr[BUF_X2][HAW-1:0]),
    .rdata(b_rdata[BUF_X2]));
  feature_buffer #(.DEPTH(X0_DEPTH)) u_agg (
    .clk, .we(b_we[BUF_AGG]), .waddr(b_waddr[BUF_AGG]), .wmask(b_wmask[BUF_AGG]),
    .wdata(b_wdata[BUF_AGG]), .re(b_re[BUF_AGG]), .raddr(b_raddr[BUF_AGG]),
    .rdata(b_rdata[BUF_AGG]));
  feature_buffer #(.DEPTH(XO_DEPTH)) u_xout (
    .clk, .we(b_we[BUF_XOUT]), .waddr(b_waddr[BUF_XOUT][OAW-1:0]), .wmask(b_wmask[BUF_XOUT]),
    .wdata(b_wdata[BUF_XOUT]), .re(b_re[BUF_XOUT]), .raddr(b_raddr[BUF_XOUT][OAW-1:0]),
    .rdata(b_rdata[BUF_XOUT]));

  // ReLU status bits of the three output buffers
  feature_buffer #(.DEPTH(XH_DEPTH), .LW(1)) u_m1 (
    .clk, .we(b_we[BUF_X1]), .waddr(b_waddr[BUF_X1][HAW-1:0]), .wmask(b_wmask[BUF_X1]),
    .wdata(b_wclip[BUF_X1]), .re(b_re[BUF_X1]), .raddr(b_raddr[BUF_X1][HAW-1:0]),
    .rdata(b_rclip[BUF_X1]));
  feature_buffer #(.DEPTH(XH_DEPTH), .LW(1)) u_m2 (
    .clk, .we(b_we[BUF_X2]), .waddr(b_waddr[BUF_X2][HAW-1:0]), .wmask(b_wmask[BUF_X2]),
    .wdata(b_wclip[BUF_X2]), .re(b_re[BUF_X2]), .raddr(b_raddr[BUF_X2][HAW-1:0]),
    .rdata(b_rclip[BUF_X2]));
  feature_buffer #(.DEPTH(XO_DEPTH), .LW(1)) u_mo (
    .clk, .we(b_we[BUF_XOUT]), .waddr(b_waddr[BUF_XOUT][OAW-1:0]), .wmask(b_wmask[BUF_XOUT]),
    .wdata(b_wclip[BUF_XOUT]), .re(b_re[BUF_XOUT]), .raddr(b_raddr[BUF_XOUT][OAW-1:0]),
    .rdata(b_rclip[BUF_XOUT]));
  assign b_rclip[BUF_X0]  = '0;
  assign b_rclip[BUF_AGG] = '0;

  // the host must stay off the buffers while the pipeline runs
  assert property (@(posedge clk) disable iff (!rst_n) (fa_busy || wt_busy) |-> !h_we);
endmodule
