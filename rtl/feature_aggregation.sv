// feature_aggregation - computes D^-1 * A_s^# * X for one GCN layer.
//
// How it works.  The CPU has rewritten the sampled subgraph so that pairs of
// nodes that occur together in many neighbour lists are summed once: the
// pair list M_a names those pairs, and the reduced adjacency A_s^# refers to
// a pair sum by the index |V_s| + m.  For every 128-feature chunk of the
// input vectors the module runs three steps on its 128-lane accumulator
// array:
//   1. pre-computation: for each pair m (in list order, so that a pair of a
//      later reduction round finds the sums it uses already written) read
//      X[u] and X[v] on consecutive cycles and write their sum to X_M[m].
//      X_M holds the current chunk only (one word per pair): the chunks are
//      processed one after the other, each recomputing its pair sums.
//      Pairs overlap, so each costs two cycles; a pair that reads the sum
//      of the pair just before it waits until that sum is written
//      (hazard_waits counts these cycles);
//   2. propagation: for each node v, read its neighbour indices one per
//      cycle and accumulate the vectors they name (from X or from X_M);
//   3. scaling: multiply the sum by 1/deg(v) and write it to the
//      aggregation buffer, which the weight-transformation module reads.
// A node without neighbours gets a zero vector.
//
// The three steps, the pair-per-two-cycles and index-per-cycle rates, and
// the round ordering of the pairs follow the source.  The chunking of long
// vectors, the hazard wait, and the 4-cycle per-node overhead of step 3
// (not overlapped with the next node) are this design's choices.
//
// Stall.  The X buffer read port is shared with the tile-buffer fill of the
// weight-transformation module, which has priority.  While stall is high the
// module issues no new read (reads in flight complete); stall_cycles counts
// the cycles in which a read was held back.
//
// Interface: start (pulse) with cfg sampled at start, done (pulse), busy.
// X read port x_re/x_raddr with x_rdata one cycle later; aggregation-buffer
// write port agg_we/agg_waddr/agg_wdata.  Host writes of the topology and the
// pair list arrive on hw_*; they must not overlap a run.
//
// Lint notes: rst_n is also the disable condition of the assertions, which the
// linter reports as a synchronous use of an asynchronous reset (SYNCASYNCNET);
// every flop uses it only as an asynchronous reset.
// The top bit of pair_raddr, pm_node and m_wr is unused: node indices are
// 14 bits wide, while the pair and X_M buffers need only 13 address bits
// (8192 words).
module feature_aggregation
  import graphact_pkg::*;
#(
  parameter int NODES_MAX = 4000,
  parameter int EDGES_MAX = 65536,
  parameter int PAIRS_MAX = 8000,
  parameter int XM_DEPTH  = 8192,
  parameter int X_DEPTH   = 16384,   // address space of the X buffers and the aggregation buffer
  localparam int XAW  = $clog2(X_DEPTH),
  localparam int XMAW = $clog2(XM_DEPTH),
  localparam int NAW  = $clog2(NODES_MAX),
  localparam int EAW  = $clog2(EDGES_MAX),
  localparam int PAW  = $clog2(PAIRS_MAX)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  node_t            n_nodes,
  input  node_t            n_pairs,
  input  logic [2:0]       nch,
  output logic             busy,
  output logic             done,
  input  logic             stall,
  // host writes of A_s^#, D_s and M_a
  input  logic             hw_en,
  input  host_tgt_e        hw_tgt,
  input  logic [CNT_W-1:0] hw_addr,
  input  logic [31:0]      hw_data,
  // X^(l) read port
  output logic             x_re,
  output logic [XAW-1:0]   x_raddr,
  input  fvec_t            x_rdata,
  // aggregation buffer write port
  output logic             agg_we,
  output logic [XAW-1:0]   agg_waddr,
  output fvec_t            agg_wdata,
  // event counters
  output logic [31:0]      stall_cycles,
  output logic [31:0]      hazard_waits
);
  localparam logic [2:0] ACC_NOP = 3'd0, ACC_LOAD = 3'd1, ACC_ADD = 3'd2,
                         ACC_SCALE = 3'd3, ACC_ZERO = 3'd4;

  typedef enum logic [3:0] {
    S_IDLE, S_PRE_RD, S_PRE_A, S_PRE_B, S_PRE_TAIL,
    S_NODE_RD, S_NODE_PTR, S_STREAM, S_DRAIN, S_SCALE, S_WRITE, S_ZERO
  } state_e;

  state_e           st;
  node_t            nn, np;          // run configuration
  logic [2:0]       nc;
  logic [2:0]       chunk;
  node_t            m;               // pair counter
  node_t            v;               // node counter
  logic [CNT_W-1:0] beg, endp, p;
  fp32_t            coef;

  // ---------------------------------------------------------------- storage
  logic [CNT_W-1:0] end_ptr_q;
  fp32_t            dinv_q;
  node_t            col_idx_q;
  logic             re_node, re_edge;
  logic [2*NODE_W-1:0] pair_q;
  logic             re_pair;
  node_t            pair_raddr;

  topo_buffer #(.NODES_MAX(NODES_MAX), .EDGES_MAX(EDGES_MAX)) u_topo (
    .clk,
    .we_endptr(hw_en && hw_tgt == HW_ENDPTR),
    .we_colidx(hw_en && hw_tgt == HW_COLIDX),
    .we_dinv  (hw_en && hw_tgt == HW_DINV),
    .waddr(hw_addr), .wdata(hw_data),
    .re_node, .rnode(v[NAW-1:0]), .end_ptr(end_ptr_q), .dinv(dinv_q),
    .re_edge, .redge(p[EAW-1:0]), .col_idx(col_idx_q));

  sram_1r1w #(.DEPTH(PAIRS_MAX), .W(2*NODE_W)) u_pairs (
    .clk, .we(hw_en && hw_tgt == HW_PAIR), .waddr(hw_addr[PAW-1:0]),
    .wdata(hw_data[2*NODE_W-1:0]), .re(re_pair), .raddr(pair_raddr[PAW-1:0]), .rdata(pair_q));

  logic           xm_we, xm_re;
  logic [XMAW-1:0] xm_waddr, xm_raddr;
  fvec_t          xm_rdata;
  fp32_t [P_AGG-1:0] acc;
  logic [2:0]     acc_op;
  fvec_t          din;

  feature_buffer #(.DEPTH(XM_DEPTH), .LANES(P_AGG), .LW(32)) u_xm (
    .clk, .we(xm_we), .waddr(xm_waddr), .wmask('1), .wdata(acc),
    .re(xm_re), .raddr(xm_raddr), .rdata(xm_rdata));

  accum_array #(.LANES(P_AGG)) u_acc (
    .clk, .rst_n, .op(acc_op), .din, .coef, .acc);

  // ------------------------------------------------------ feature read unit
  // rd_req/rd_node are driven by the control below; the read goes to X or
  // X_M depending on the index, and rd_src_q steers the data a cycle later.
  logic  rd_req;
  node_t rd_node;
  logic  rd_src_q;     // 1: data comes from X_M
  node_t pm_node;      // rd_node - n_nodes

  always_comb begin
    pm_node  = rd_node - nn;
    x_re     = rd_req && (rd_node < nn);
    xm_re    = rd_req && !(rd_node < nn);
    x_raddr  = XAW'(rd_node) * XAW'(nc) + XAW'(chunk);
    xm_raddr = XMAW'(pm_node);
    din      = rd_src_q ? xm_rdata : x_rdata;
  end

  // ------------------------------------------------------ pipeline tags
  // step 1: s1_load / s1_add mark the cycle the u / v data arrive, s2_wr the
  // cycle the pair sum is written.  step 2: e1 holds a neighbour index read
  // from col_idx, e2 marks the arrival of that neighbour's vector.
  logic  s1_load, s1_add, s2_wr;
  node_t pend_node;
  logic [XMAW-1:0] s2_addr;
  logic  e1_vld, e1_first, e1_last;
  logic  e2_vld, e2_first;
  logic  pair_hazard;
  node_t pu, pv;
  node_t m_wr;
  logic  rd_req_wanted;

  assign pair_raddr = (st == S_PRE_B) ? m + 1'b1 : m;
  assign pu = pair_q[NODE_W-1:0];
  assign pv = pair_q[2*NODE_W-1:NODE_W];
  assign pair_hazard = (s1_add || s2_wr) && (pu == pend_node || pv == pend_node);

  // control outputs that depend on the state in this cycle
  always_comb begin
    rd_req  = 1'b0;
    rd_node = '0;
    re_node = 1'b0;
    re_edge = 1'b0;
    re_pair = 1'b0;
    unique case (st)
      S_PRE_RD:  re_pair = 1'b1;
      S_PRE_A:   if (!stall && !pair_hazard) begin rd_req = 1'b1; rd_node = pu; end
      S_PRE_B:   if (!stall) begin
                   rd_req  = 1'b1;
                   rd_node = pv;
                   re_pair = (m + 1'b1) < np;   // prefetch the next pair
                 end
      S_NODE_RD: re_node = 1'b1;
      default: ;
    endcase
    // step 2: e1 turns into a feature read unless stalled; the edge fetch
    // runs only when e1 is empty or moves on in this cycle
    if (e1_vld && !stall) begin
      rd_req  = 1'b1;
      rd_node = col_idx_q;
    end
    if (st == S_STREAM && !stall) re_edge = 1'b1;
  end

  always_comb begin
    acc_op = ACC_NOP;
    if (s1_load) acc_op = ACC_LOAD;
    if (s1_add)  acc_op = ACC_ADD;
    if (e2_vld)  acc_op = e2_first ? ACC_LOAD : ACC_ADD;
    if (st == S_SCALE) acc_op = ACC_SCALE;
    if (st == S_ZERO)  acc_op = ACC_ZERO;
  end

  assign xm_we     = s2_wr;
  assign xm_waddr  = s2_addr;
  assign agg_we    = (st == S_WRITE);
  assign agg_waddr = XAW'(v) * XAW'(nc) + XAW'(chunk);
  assign agg_wdata = acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      nn <= '0; np <= '0; nc <= '0; chunk <= '0;
      m <= '0; v <= '0; beg <= '0; endp <= '0; p <= '0; coef <= FP_ZERO;
      s1_load <= 1'b0; s1_add <= 1'b0; s2_wr <= 1'b0; pend_node <= '0; s2_addr <= '0;
      e1_vld <= 1'b0; e1_first <= 1'b0; e1_last <= 1'b0;
      e2_vld <= 1'b0; e2_first <= 1'b0;
      rd_src_q <= 1'b0;
      done <= 1'b0;
      stall_cycles <= '0;
      hazard_waits <= '0;
    end else begin
      done <= 1'b0;
      if (rd_req) rd_src_q <= !(rd_node < nn);

      // step-1 tags
      s1_load <= (st == S_PRE_A) && !stall && !pair_hazard;
      s1_add  <= (st == S_PRE_B) && !stall;
      s2_wr   <= s1_add;
      if ((st == S_PRE_B) && !stall) pend_node <= nn + m;
      if (s1_add) s2_addr <= XMAW'(m_wr);

      // step-2 tags
      e2_vld   <= e1_vld && !stall;
      e2_first <= e1_first;
      if (e1_vld && !stall) e1_vld <= 1'b0;
      if (re_edge) begin
        e1_vld   <= 1'b1;
        e1_first <= (p == beg);
        e1_last  <= (p == endp - 1'b1);
      end

      if (busy && stall && (rd_req_wanted)) stall_cycles <= stall_cycles + 1;
      if (st == S_PRE_A && pair_hazard) hazard_waits <= hazard_waits + 1;

      unique case (st)
        S_IDLE: if (start) begin
          nn <= n_nodes; np <= n_pairs; nc <= nch; chunk <= '0;
          m <= '0; v <= '0; beg <= '0;
          st <= (n_pairs != 0) ? S_PRE_RD : S_NODE_RD;
        end
        S_PRE_RD: st <= S_PRE_A;
        S_PRE_A:  if (!stall && !pair_hazard) st <= S_PRE_B;
        S_PRE_B:  if (!stall) begin
          if ((m + 1'b1) < np) begin
            m  <= m + 1'b1;
            st <= S_PRE_A;
          end else st <= S_PRE_TAIL;
        end
        S_PRE_TAIL: if (!s1_add && !s2_wr) st <= S_NODE_RD;
        S_NODE_RD:  st <= S_NODE_PTR;
        S_NODE_PTR: begin
          endp <= end_ptr_q;
          coef <= dinv_q;
          p    <= beg;
          st   <= (end_ptr_q == beg) ? S_ZERO : S_STREAM;
        end
        S_STREAM: if (!stall) begin
          p <= p + 1'b1;
          if (p == endp - 1'b1) st <= S_DRAIN;
        end
        S_DRAIN: if (!e1_vld && !e2_vld) st <= S_SCALE;
        S_SCALE: st <= S_WRITE;
        S_ZERO:  st <= S_WRITE;
        S_WRITE: begin
          beg <= endp;
          if (v + 1'b1 < nn) begin
            v  <= v + 1'b1;
            st <= S_NODE_RD;
          end else if (chunk + 1'b1 < nc) begin
            chunk <= chunk + 1'b1;
            v     <= '0;
            beg   <= '0;
            m     <= '0;
            st    <= (np != 0) ? S_PRE_RD : S_NODE_RD;
          end else begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // index of the pair whose sum is being added (captured when v was read)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_wr <= '0;
    else if ((st == S_PRE_B) && !stall) m_wr <= m;
  end

  // a read the control wanted to issue but could not because of the stall
  assign rd_req_wanted = (st == S_PRE_A && !pair_hazard) || st == S_PRE_B || e1_vld
                         || st == S_STREAM;

  assign busy = (st != S_IDLE);

  // the sum of a pair must not be read before it is written
  assert property (@(posedge clk) disable iff (!rst_n)
                   (st == S_PRE_A && rd_req) |-> !(pair_hazard));
endmodule
