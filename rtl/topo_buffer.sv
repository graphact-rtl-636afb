// topo_buffer - the reduced subgraph A_s^# and the degree coefficients D_s.
//
// Three block-RAM arrays:
//   end_ptr[v]  exclusive end of node v's neighbour list in col_idx
//               (the list of node 0 starts at 0, list v starts at end_ptr[v-1]);
//   col_idx[p]  neighbour indices; an index >= |V_s| names a pre-computed
//               pair sum in the X_M buffer;
//   dinv[v]     1/deg(v) of the original subgraph as an FP32 value, the
//               scaling coefficient of the aggregation's last step.
// The neighbour lists are read strictly in sequence, one index per cycle, by
// the feature aggregation module.  The compressed-row format and the stored
// reciprocal are choices of this design; the source only says that the
// lists are read sequentially and that D_s scales the result.
//
// Interface: one host write port shared by the three arrays (one write
// enable each), a node read port (end_ptr and dinv of rnode) and an edge read
// port; reads have one cycle of latency and hold their data while their
// enable is low.
//
// Lint note: waddr is CNT_W = 17 bits wide, the generic counter width. The
// neighbour-index array needs 16 address bits (65536 entries), so bit 16 is
// unused.
module topo_buffer
  import graphact_pkg::*;
#(
  parameter int NODES_MAX = 4000,
  parameter int EDGES_MAX = 65536,
  localparam int NAW = $clog2(NODES_MAX),
  localparam int EAW = $clog2(EDGES_MAX)
) (
  input  logic             clk,
  // host write
  input  logic             we_endptr,
  input  logic             we_colidx,
  input  logic             we_dinv,
  input  logic [CNT_W-1:0] waddr,
  input  logic [31:0]      wdata,
  // read ports
  input  logic             re_node,
  input  logic [NAW-1:0]   rnode,
  output logic [CNT_W-1:0] end_ptr,
  output fp32_t            dinv,
  input  logic             re_edge,
  input  logic [EAW-1:0]   redge,
  output node_t            col_idx
);
  sram_1r1w #(.DEPTH(NODES_MAX), .W(CNT_W)) u_endptr (
    .clk, .we(we_endptr), .waddr(waddr[NAW-1:0]), .wdata(wdata[CNT_W-1:0]),
    .re(re_node), .raddr(rnode), .rdata(end_ptr));
  sram_1r1w #(.DEPTH(NODES_MAX), .W(32)) u_dinv (
    .clk, .we(we_dinv), .waddr(waddr[NAW-1:0]), .wdata(wdata),
    .re(re_node), .raddr(rnode), .rdata(dinv));
  sram_1r1w #(.DEPTH(EDGES_MAX), .W(NODE_W)) u_colidx (
    .clk, .we(we_colidx), .waddr(waddr[EAW-1:0]), .wdata(wdata[NODE_W-1:0]),
    .re(re_edge), .raddr(redge), .rdata(col_idx));
endmodule
