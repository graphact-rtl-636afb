// graphact_ctrl - scheduler of the forward pass on the accelerator.
//
// One minibatch (a sampled subgraph whose inputs the host has loaded) runs
// through L = 2 graph convolutional layers and the single-layer MLP of the
// node classifier.  For layer l the scheduler
//   step a+b: starts the feature aggregation of X^(l-1) and, at the same
//             time, the self-weight product X^(l-1) * W_self^(l), which
//             writes columns [0, f/2) of X^(l);
//   step c:   once both have finished, starts the neighbour-weight product
//             AGG * W_neigh^(l), which reads the aggregation result and writes
//             columns [f/2, f) of X^(l).  The aggregation module is idle.
// Both products apply ReLU.  The MLP then computes X_MLP^out =
// ReLU(X^(L) * W_MLP) into the output buffer and done pulses.
//
// The a/b overlap followed by c is the schedule of the source's forward
// pass; the backward pass is not scheduled here.  Weight placement (this
// design's choice): with ntc = ceil((f_hid/2)/P) tile columns, layer 1's
// weights start at address 0 of each weight buffer, layer 2's at
// f_in*ntc, and W_MLP in the self-weight buffer at f_in*ntc + f_hid*ntc.
//
// phase reports the running step; ab_cycles/c_cycles/mlp_cycles count the
// cycles spent in each step since reset (they accumulate over runs).
//
// Lint note: the scheduler uses only the width fields of the batch
// configuration. The node and pair counts go straight to the modules, so
// those bits of the stored copy c are unused.
module graphact_ctrl
  import graphact_pkg::*;
#(
  parameter int P   = 24,
  parameter int WAW = 13
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  batch_cfg_t    cfg,
  output logic          busy,
  output logic          done,
  // feature aggregation
  output logic          fa_start,
  output logic [2:0]    fa_nch,
  output buf_sel_e      fa_src,
  input  logic          fa_done,
  // weight transformation
  output logic          wt_start,
  output logic [9:0]    wt_k,
  output logic [2:0]    wt_nch_a,
  output logic [9:0]    wt_ncols,
  output logic [9:0]    wt_coloff,
  output logic [2:0]    wt_nch_out,
  output logic          wt_wsel,
  output logic [WAW-1:0] wt_wbase,
  output logic          wt_relu,
  output buf_sel_e      wt_src,
  output buf_sel_e      wt_dst,
  input  logic          wt_done,
  // monitoring
  output logic [1:0]    phase,       // 0 idle, 1 a+b, 2 c, 3 MLP
  output logic [31:0]   ab_cycles,
  output logic [31:0]   c_cycles,
  output logic [31:0]   mlp_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_AB_GO, S_AB, S_C_GO, S_C, S_MLP_GO, S_MLP} state_e;
  state_e     st;
  batch_cfg_t c;
  logic       layer;           // 0: layer 1, 1: layer 2
  logic       fa_fin, wt_fin;

  logic [2:0]     nch_in, nch_h, nch_cls, nch_l;
  logic [9:0]     half, k_l;
  logic [WAW-1:0] ntc_h, base_l2, base_mlp;

  always_comb begin
    nch_in   = 3'(ceil_div(32'(c.f_in), P_AGG));
    nch_h    = 3'(ceil_div(32'(c.f_hid), P_AGG));
    nch_cls  = 3'(ceil_div(32'(c.n_cls), P_AGG));
    half     = c.f_hid >> 1;
    ntc_h    = WAW'(ceil_div(32'(half), P));
    base_l2  = WAW'(c.f_in) * ntc_h;
    base_mlp = base_l2 + WAW'(c.f_hid) * ntc_h;
    nch_l    = layer ? nch_h : nch_in;
    k_l      = layer ? c.f_hid : c.f_in;
  end

  always_comb begin
    fa_start   = (st == S_AB_GO);
    fa_nch     = nch_l;
    fa_src     = layer ? BUF_X1 : BUF_X0;
    wt_start   = (st == S_AB_GO) || (st == S_C_GO) || (st == S_MLP_GO);
    wt_k       = k_l;
    wt_nch_a   = nch_l;
    wt_ncols   = half;
    wt_coloff  = '0;
    wt_nch_out = nch_h;
    wt_wsel    = 1'b0;
    wt_wbase   = layer ? base_l2 : '0;
    wt_relu    = 1'b1;
    wt_src     = layer ? BUF_X1 : BUF_X0;
    wt_dst     = layer ? BUF_X2 : BUF_X1;
    phase      = 2'd0;
    unique case (st)
      S_AB_GO, S_AB: phase = 2'd1;
      S_C_GO, S_C: begin
        phase     = 2'd2;
        wt_src    = BUF_AGG;
        wt_wsel   = 1'b1;
        wt_coloff = half;
      end
      S_MLP_GO, S_MLP: begin
        phase      = 2'd3;
        wt_src     = BUF_X2;
        wt_dst     = BUF_XOUT;
        wt_k       = c.f_hid;
        wt_nch_a   = nch_h;
        wt_ncols   = c.n_cls;
        wt_nch_out = nch_cls;
        wt_wbase   = base_mlp;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; layer <= 1'b0; fa_fin <= 1'b0; wt_fin <= 1'b0;
      done <= 1'b0; ab_cycles <= '0; c_cycles <= '0; mlp_cycles <= '0;
    end else begin
      done <= 1'b0;
      if (st == S_AB)  ab_cycles  <= ab_cycles + 1;
      if (st == S_C)   c_cycles   <= c_cycles + 1;
      if (st == S_MLP) mlp_cycles <= mlp_cycles + 1;
      if (fa_done) fa_fin <= 1'b1;
      if (wt_done) wt_fin <= 1'b1;
      unique case (st)
        S_IDLE: if (start) begin
          c     <= cfg;
          layer <= 1'b0;
          st    <= S_AB_GO;
        end
        S_AB_GO: begin
          fa_fin <= 1'b0;
          wt_fin <= 1'b0;
          st     <= S_AB;
        end
        S_AB: if ((fa_fin || fa_done) && (wt_fin || wt_done)) st <= S_C_GO;
        S_C_GO: begin
          wt_fin <= 1'b0;
          st     <= S_C;
        end
        S_C: if (wt_fin || wt_done) begin
          if (!layer) begin
            layer <= 1'b1;
            st    <= S_AB_GO;
          end else st <= S_MLP_GO;
        end
        S_MLP_GO: begin
          wt_fin <= 1'b0;
          st     <= S_MLP;
        end
        S_MLP: if (wt_fin || wt_done) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
endmodule
