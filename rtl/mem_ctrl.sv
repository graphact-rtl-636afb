// mem_ctrl - memory controller between the feature buffers and their users.
//
// The pipeline has five feature buffers (X^(0), X^(1), X^(2), the
// aggregation buffer and X_MLP^out), each with one read and one write port,
// and three users: the feature aggregation module (FA), the weight
// transformation module (WT) and the host.  The scheduler tells the
// controller which buffer each computation module works on in the current
// step (fa_src, wt_src, wt_dst); the controller routes the ports:
//   read  port: WT tile fill > FA > host;
//   write port: WT results > FA aggregation results > host loads.
// Read data go back to the requester that issued the read one cycle
// earlier.  When the tile fill and the aggregation module want the same
// buffer, the fill wins and fa_stall holds the aggregation module - the only
// read conflict of the pipeline, as in the source.  Writes never collide in
// a correct schedule; an assertion checks this.
//
// The source draws two memory controllers (one per side of the pipeline)
// and names them only; this single routing block and its priority order are
// this design's.  It is purely combinational apart from the registered
// data-return selects.
//
// Lint notes: rst_n is also the disable condition of the assertions, which the
// linter reports as a synchronous use of an asynchronous reset (SYNCASYNCNET);
// every flop uses it only as an asynchronous reset.
module mem_ctrl
  import graphact_pkg::*;
#(
  parameter int NBUF = 5,
  parameter int AW   = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // routing set by the scheduler
  input  buf_sel_e             fa_src,
  input  buf_sel_e             wt_src,
  input  buf_sel_e             wt_dst,
  // FA
  input  logic                 fa_re,
  input  logic [AW-1:0]        fa_raddr,
  output fvec_t                fa_rdata,
  output logic                 fa_stall,
  input  logic                 fa_we,
  input  logic [AW-1:0]        fa_waddr,
  input  fvec_t                fa_wdata,
  // WT
  input  logic                 wt_fill,
  input  logic                 wt_re,
  input  logic [AW-1:0]        wt_raddr,
  output fvec_t                wt_rdata,
  input  logic                 wt_we,
  input  logic [AW-1:0]        wt_waddr,
  input  lmask_t               wt_wmask,
  input  fvec_t                wt_wdata,
  input  lmask_t               wt_wclip,
  // host
  input  logic                 h_re,
  input  buf_sel_e             h_rsel,
  input  logic [AW-1:0]        h_raddr,
  output fvec_t                h_rdata,
  output lmask_t               h_rclip,
  input  logic                 h_we,
  input  buf_sel_e             h_wsel,
  input  logic [AW-1:0]        h_waddr,
  input  lmask_t               h_wmask,
  input  fvec_t                h_wdata,
  // buffer side
  output logic  [NBUF-1:0]         b_re,
  output logic  [NBUF-1:0][AW-1:0] b_raddr,
  input  fvec_t [NBUF-1:0]         b_rdata,
  input  lmask_t [NBUF-1:0]        b_rclip,
  output logic  [NBUF-1:0]         b_we,
  output logic  [NBUF-1:0][AW-1:0] b_waddr,
  output lmask_t [NBUF-1:0]        b_wmask,
  output fvec_t [NBUF-1:0]         b_wdata,
  output lmask_t [NBUF-1:0]        b_wclip
);
  buf_sel_e fa_sel_q, wt_sel_q, h_sel_q;
  logic     fa_go;

  assign fa_stall = wt_fill && (wt_src == fa_src);
  assign fa_go    = fa_re && !fa_stall;

  always_comb begin
    for (int b = 0; b < NBUF; b++) begin
      b_re[b]    = 1'b0;
      b_raddr[b] = '0;
      b_we[b]    = 1'b0;
      b_waddr[b] = '0;
      b_wmask[b] = '0;
      b_wdata[b] = '0;
      b_wclip[b] = '0;
      // read port, lowest priority first
      if (h_re && h_rsel == buf_sel_e'(b)) begin
        b_re[b] = 1'b1; b_raddr[b] = h_raddr;
      end
      if (fa_go && fa_src == buf_sel_e'(b)) begin
        b_re[b] = 1'b1; b_raddr[b] = fa_raddr;
      end
      if (wt_re && wt_src == buf_sel_e'(b)) begin
        b_re[b] = 1'b1; b_raddr[b] = wt_raddr;
      end
      // write port, lowest priority first
      if (h_we && h_wsel == buf_sel_e'(b)) begin
        b_we[b] = 1'b1; b_waddr[b] = h_waddr; b_wmask[b] = h_wmask; b_wdata[b] = h_wdata;
      end
      if (fa_we && b == int'(BUF_AGG)) begin
        b_we[b] = 1'b1; b_waddr[b] = fa_waddr; b_wmask[b] = '1; b_wdata[b] = fa_wdata;
      end
      if (wt_we && wt_dst == buf_sel_e'(b)) begin
        b_we[b] = 1'b1; b_waddr[b] = wt_waddr; b_wmask[b] = wt_wmask;
        b_wdata[b] = wt_wdata; b_wclip[b] = wt_wclip;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fa_sel_q <= BUF_X0;
      wt_sel_q <= BUF_X0;
      h_sel_q  <= BUF_X0;
    end else begin
      if (fa_go) fa_sel_q <= fa_src;
      if (wt_re) wt_sel_q <= wt_src;
      if (h_re)  h_sel_q  <= h_rsel;
    end
  end

  assign fa_rdata = b_rdata[fa_sel_q];
  assign wt_rdata = b_rdata[wt_sel_q];
  assign h_rdata  = b_rdata[h_sel_q];
  assign h_rclip  = b_rclip[h_sel_q];

  // no two writers on one buffer, no host read stolen by a module
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(wt_we && fa_we && wt_dst == BUF_AGG));
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(h_re && ((fa_go && fa_src == h_rsel) || (wt_re && wt_src == h_rsel))));
endmodule
