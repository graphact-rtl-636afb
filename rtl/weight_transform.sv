// weight_transform - the weight-transformation module: OUT = act(A * W).
//
// How it works.  A (n_rows x K, one node per row, feature-major in a feature
// buffer) is cut into tiles of P rows; W (K x n_cols, in a column-banked
// weight_buffer) into tile columns of P columns.  For every tile row the
// module
//   1. fills the tile buffer: P rows x ceil(K/128) chunks, one chunk read
//      from the feature buffer per cycle (rows past n_rows are zero-filled
//      without a read).  This is the only time it reads the shared feature
//      buffer; fill_active tells the memory controller to stall the
//      aggregation module meanwhile;
//   2. for each tile column, streams the K+P-1 skewed diagonals of the
//      (tile, W tile) pair into the systolic array, one per cycle;
//   3. when the array reports the pair finished, copies the P x P results
//      (already passed through ReLU when relu_en) into a result register and
//      drains them, one tile row per cycle, into the output feature buffer
//      at feature column col_off + tc*P.  A row that straddles two 128-lane
//      words takes two writes.  Draining overlaps the next pair's stream.
// Writing the self-weight product at col_off = 0 and the neighbour-weight
// product at col_off = f/2 realises the concatenation of a GCN layer.
//
// Rates.  A tile pair occupies the array for K+P-1 cycles, as in the source.
// Draining needs at most 2P cycles, so when K > P pairs follow each other
// back to back; when K <= P the next pair waits for the drain (this design's
// rule).  compute_cycles counts stream cycles, fill_cycles fill cycles.
//
// Interface: start (pulse) samples the operation fields; done pulses when
// the last result is written.  Feature read port a_re/a_raddr, data a cycle
// later on a_rdata.  Output write port o_* with lane mask and the ReLU
// status bits.  Host writes to the two weight buffers on hw_*.
//
// Lint notes: rst_n is also the disable condition of the assertions, which the
// linter reports as a synchronous use of an asynchronous reset (SYNCASYNCNET);
// every flop uses it only as an asynchronous reset.
// The reset of the 24 x 24 result register is one 18432-bit zero, which the
// linter reports as a long replication (WIDTHCONCAT).
module weight_transform
  import graphact_pkg::*;
#(
  parameter int P       = 24,
  parameter int W_DEPTH = 8192,
  parameter int X_DEPTH = 16384,
  localparam int XAW = $clog2(X_DEPTH),
  localparam int WAW = $clog2(W_DEPTH),
  localparam int KW  = $clog2(NCH_MAX * P_AGG),
  localparam int RW  = $clog2(P),
  localparam int CW  = $clog2(NCH_MAX)
) (
  input  logic             clk,
  input  logic             rst_n,
  // operation
  input  logic             start,
  input  node_t            n_rows,
  input  logic [9:0]       k_len,
  input  logic [2:0]       nch_a,
  input  logic [9:0]       n_cols,
  input  logic [9:0]       col_off,
  input  logic [2:0]       nch_out,
  input  logic             wsel,      // 0: W_self buffer, 1: W_neigh buffer
  input  logic [WAW-1:0]   wbase,
  input  logic             relu_en,
  output logic             busy,
  output logic             done,
  // left operand read port
  output logic             a_re,
  output logic [XAW-1:0]   a_raddr,
  input  fvec_t            a_rdata,
  output logic             fill_active,
  // output write port
  output logic             o_we,
  output logic [XAW-1:0]   o_waddr,
  output lmask_t           o_wmask,
  output fvec_t            o_wdata,
  output lmask_t           o_wclip,
  // host weight writes
  input  logic             hw_en,
  input  host_tgt_e        hw_tgt,
  input  logic [WAW-1:0]   hw_addr,
  input  fp32_t [P-1:0]    hw_wdata,
  input  logic [P-1:0]     hw_bmask,
  // event counters
  output logic [31:0]      compute_cycles,
  output logic [31:0]      fill_cycles,
  output logic [31:0]      pairs_done
);
  typedef enum logic [2:0] {S_IDLE, S_FILL, S_FILL_WAIT, S_COMPUTE, S_NEXT, S_FINISH} state_e;
  state_e st;

  // operation registers
  node_t       nr;
  logic [9:0]  kl, ncol, coff;
  logic [2:0]  nca, nco;
  logic        ws, relu;
  logic [WAW-1:0] wb;
  logic [9:0]  ntc, ntr;

  logic [9:0]  tr, tc;           // current tile row / tile column
  logic [RW-1:0] fi;             // fill row
  logic [2:0]  fc;               // fill chunk
  logic [10:0] t;                // diagonal counter
  logic [1:0]  inflight;         // pairs streamed but not yet drained

  // ------------------------------------------------------------ storage
  logic            tb_we;
  logic [RW-1:0]   tb_wrow;
  logic [CW-1:0]   tb_wchunk;
  fvec_t           tb_wdata;
  logic [P-1:0][KW-1:0] tb_rk;
  logic [P-1:0]    tb_rvalid;
  fp32_t [P-1:0]   a_diag;
  logic            rd_en;

  tile_buffer #(.P(P), .NCH(NCH_MAX)) u_tile (
    .clk, .we(tb_we), .wrow(tb_wrow), .wchunk(tb_wchunk), .wdata(tb_wdata),
    .re(rd_en), .rk(tb_rk), .rvalid(tb_rvalid), .rdata(a_diag));

  logic [P-1:0][WAW-1:0] w_raddr;
  fp32_t [P-1:0]   w_self, w_neigh, b_diag;

  weight_buffer #(.P(P), .DEPTH(W_DEPTH)) u_wself (
    .clk, .we(hw_en && hw_tgt == HW_WSELF), .waddr(hw_addr), .bmask(hw_bmask),
    .wdata(hw_wdata), .re(rd_en && !ws), .raddr(w_raddr), .rdata(w_self));
  weight_buffer #(.P(P), .DEPTH(W_DEPTH)) u_wneigh (
    .clk, .we(hw_en && hw_tgt == HW_WNEIGH), .waddr(hw_addr), .bmask(hw_bmask),
    .wdata(hw_wdata), .re(rd_en && ws), .raddr(w_raddr), .rdata(w_neigh));
  assign b_diag = ws ? w_neigh : w_self;

  logic [P-1:0] a_vld, a_first, a_last;
  fp32_t [P-1:0][P-1:0] res;
  logic  [P-1:0][P-1:0] res_clip;
  logic  tile_done;

  systolic_array #(.P(P)) u_array (
    .clk, .rst_n, .relu_en(relu), .a_in(a_diag), .a_vld, .a_first, .a_last,
    .b_in(b_diag), .res, .res_clip, .tile_done);

  // ------------------------------------------------------------ fill
  node_t fill_node;
  logic  fill_real;
  logic  f_vld, f_zero;
  logic [RW-1:0] f_row;
  logic [2:0]    f_chunk;

  always_comb begin
    fill_node   = node_t'(tr * P) + node_t'(fi);
    fill_real   = (st == S_FILL) && (fill_node < nr);
    a_re        = fill_real;
    a_raddr     = XAW'(fill_node) * XAW'(nca) + XAW'(fc);
    fill_active = (st == S_FILL);
    tb_we       = f_vld;
    tb_wrow     = f_row;
    tb_wchunk   = CW'(f_chunk);
    tb_wdata    = f_zero ? '0 : a_rdata;
  end

  // ------------------------------------------------------------ stream
  always_comb begin
    rd_en = (st == S_COMPUTE);
    for (int i = 0; i < P; i++) begin
      tb_rk[i]     = KW'(t - 11'(i));
      tb_rvalid[i] = (t >= 11'(i)) && (t - 11'(i) < 11'(kl));
      w_raddr[i]   = wb + WAW'(t - 11'(i)) * WAW'(ntc) + WAW'(tc);
    end
  end

  // tags are registered to line up with the one-cycle buffer reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_vld <= '0; a_first <= '0; a_last <= '0;
    end else
      for (int i = 0; i < P; i++) begin
        a_vld[i]   <= rd_en && tb_rvalid[i];
        a_first[i] <= rd_en && (t == 11'(i));
        a_last[i]  <= rd_en && (t == 11'(i) + 11'(kl) - 11'd1);
      end
  end

  // ------------------------------------------------------------ drain
  fp32_t [P-1:0][P-1:0] rtile;
  logic  [P-1:0][P-1:0] rclip;
  logic [9:0]  cap_tr, cap_tc;        // tile of the captured results
  logic        d_busy, d_half;
  logic [RW-1:0] d_row;
  logic        drain_last;
  node_t       d_node;
  logic [9:0]  g0, c0, off;
  logic        straddle;

  always_comb begin
    d_node   = node_t'(cap_tr * P) + node_t'(d_row);
    g0       = coff + 10'(cap_tc * P);
    c0       = g0 >> $clog2(P_AGG);
    off      = g0 & 10'(P_AGG - 1);
    straddle = (off + 10'(P)) > 10'(P_AGG);
    o_we     = d_busy && (d_node < nr);
    o_waddr  = XAW'(d_node) * XAW'(nco) + XAW'(c0) + XAW'(d_half);
    o_wmask  = '0;
    o_wdata  = '0;
    o_wclip  = '0;
    for (int l = 0; l < P_AGG; l++) begin
      int j;
      j = d_half ? (l + P_AGG - int'(off)) : (l - int'(off));
      if (j >= 0 && j < P && (int'(cap_tc) * P + j) < int'(ncol)) begin
        o_wmask[l] = 1'b1;
        o_wdata[l] = rtile[d_row][j];
        o_wclip[l] = rclip[d_row][j];
      end
    end
    drain_last = (d_row == RW'(P - 1)) && (d_half || !straddle);
  end

  // ------------------------------------------------------------ control
  logic stream_end, start_ok;
  assign stream_end = (st == S_COMPUTE) && (t == 11'(kl) + 11'(P) - 11'd2);
  assign start_ok   = (inflight == 2'd0) || (kl > 10'(P) && inflight == 2'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      nr <= '0; kl <= '0; ncol <= '0; coff <= '0; nca <= '0; nco <= '0;
      ws <= 1'b0; relu <= 1'b0; wb <= '0; ntc <= '0; ntr <= '0;
      tr <= '0; tc <= '0; fi <= '0; fc <= '0; t <= '0; inflight <= '0;
      f_vld <= 1'b0; f_zero <= 1'b0; f_row <= '0; f_chunk <= '0;
      rtile <= '0; rclip <= '0; cap_tr <= '0; cap_tc <= '0;
      d_busy <= 1'b0; d_half <= 1'b0; d_row <= '0;
      done <= 1'b0;
      compute_cycles <= '0; fill_cycles <= '0; pairs_done <= '0;
    end else begin
      done  <= 1'b0;
      f_vld <= (st == S_FILL);
      f_zero <= !fill_real;
      f_row <= fi;
      f_chunk <= fc;
      if (st == S_COMPUTE) compute_cycles <= compute_cycles + 1;
      if (st == S_FILL)    fill_cycles    <= fill_cycles + 1;

      // drain, then capture (a capture in the cycle of the last drain write
      // starts the next drain at once)
      if (d_busy) begin
        if (drain_last) begin
          d_busy <= 1'b0;
          pairs_done <= pairs_done + 1;
          if (cap_tc + 1'b1 < ntc) cap_tc <= cap_tc + 1'b1;
          else begin
            cap_tc <= '0;
            cap_tr <= cap_tr + 1'b1;
          end
        end else if (!d_half && straddle) d_half <= 1'b1;
        else begin
          d_half <= 1'b0;
          d_row  <= d_row + 1'b1;
        end
      end
      if (tile_done) begin
        rtile  <= res;
        rclip  <= res_clip;
        d_busy <= 1'b1;
        d_row  <= '0;
        d_half <= 1'b0;
      end
      inflight <= inflight + (stream_end ? 2'd1 : 2'd0) - ((d_busy && drain_last) ? 2'd1 : 2'd0);

      unique case (st)
        S_IDLE: if (start) begin
          nr <= n_rows; kl <= k_len; ncol <= n_cols; coff <= col_off;
          nca <= nch_a; nco <= nch_out; ws <= wsel; relu <= relu_en; wb <= wbase;
          ntc <= 10'(ceil_div(32'(n_cols), P));
          ntr <= 10'(ceil_div(32'(n_rows), P));
          tr <= '0; tc <= '0; fi <= '0; fc <= '0; t <= '0;
          cap_tr <= '0; cap_tc <= '0;
          st <= S_FILL;
        end
        S_FILL: begin
          if (fc + 1'b1 < nca) fc <= fc + 1'b1;
          else begin
            fc <= '0;
            if (fi == RW'(P - 1)) begin
              fi <= '0;
              st <= S_FILL_WAIT;
            end else fi <= fi + 1'b1;
          end
        end
        S_FILL_WAIT: if (start_ok) begin
          t  <= '0;
          st <= S_COMPUTE;
        end
        S_COMPUTE: begin
          t <= t + 1'b1;
          if (stream_end) begin
            t <= '0;
            // back-to-back pairs when the drain is guaranteed to keep up
            if (tc + 1'b1 < ntc && kl > 10'(P)) tc <= tc + 1'b1;
            else st <= S_NEXT;
          end
        end
        S_NEXT: begin
          t <= '0;
          if (tc + 1'b1 < ntc) begin
            if (start_ok) begin
              tc <= tc + 1'b1;
              st <= S_COMPUTE;
            end
          end else if (tr + 1'b1 < ntr) begin
            tc <= '0;
            tr <= tr + 1'b1;
            st <= S_FILL;
          end else st <= S_FINISH;
        end
        S_FINISH: if (inflight == 2'd0 && !d_busy && !tile_done) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

  // a new result tile must never arrive while the previous one drains
  assert property (@(posedge clk) disable iff (!rst_n) tile_done |-> (!d_busy || drain_last));
endmodule
