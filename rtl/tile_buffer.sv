// tile_buffer - one P-node tile of the left operand of the systolic array.
//
// The feature buffers deliver one node (128 features) per read, but the
// systolic array needs, every cycle, feature k-i of node i for all P rows at
// once (a skewed diagonal of the tile).  The tile buffer decouples the two:
// it is filled row by row from a feature buffer, one 128-feature chunk per
// cycle, and then read with an independent address per row.  Because the
// array reads only the tile buffer while it computes, the shared feature
// buffer is free for the aggregation module except during the fill.
//
// Interface: write (we, wrow, wchunk, wdata) stores one chunk of row wrow;
// read (re, rk[i], rvalid[i]) returns feature rk[i] of row i one cycle later,
// or zero where rvalid[i] was low (the zero padding of the diagonal).
module tile_buffer
  import graphact_pkg::*;
#(
  parameter int P       = 24,
  parameter int NCH     = NCH_MAX,
  localparam int KW     = $clog2(NCH * P_AGG),
  localparam int RW     = (P > 1) ? $clog2(P) : 1,
  localparam int CW     = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [RW-1:0]       wrow,
  input  logic [CW-1:0]       wchunk,
  input  fvec_t               wdata,
  input  logic                re,
  input  logic [P-1:0][KW-1:0] rk,
  input  logic [P-1:0]        rvalid,
  output fp32_t [P-1:0]       rdata
);
  localparam int LB = $clog2(P_AGG);

  for (genvar i = 0; i < P; i++) begin : g_row
    fvec_t mem [NCH];
    always_ff @(posedge clk) begin
      if (we && wrow == RW'(i)) mem[wchunk] <= wdata;
      if (re) rdata[i] <= rvalid[i] ? mem[rk[i][KW-1:LB]][rk[i][LB-1:0]] : FP_ZERO;
    end
  end
endmodule
