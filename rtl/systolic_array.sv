// systolic_array - P x P grid of sys_pe computing one output tile of X*W.
//
// Row i receives the X values of tile node i on its left edge, column j the
// W values of tile column j on its top edge.  The feeder skews the inputs so
// that X[i][k] enters row i at cycle k+i and W[k][j] enters column j at
// cycle k+j; PE (i,j) then meets both at cycle k+i+j and accumulates
// out[i][j] = sum_k X[i][k] * W[k][j].  Feeding a tile pair of inner length
// K takes K+P-1 cycles (one diagonal per cycle); the last result, PE
// (P-1,P-1), is ready 2P-2 cycles after the last diagonal entered.
//
// Interface: per-row a/valid/first/last, per-column b, relu_en; outputs the
// P x P result registers with their ReLU status bits and tile_done, a pulse
// in the cycle the bottom-right PE publishes its result (all P*P results are
// then valid and stay so until the next tile's results arrive).
module systolic_array
  import graphact_pkg::*;
#(
  parameter int P = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     relu_en,
  input  fp32_t [P-1:0]            a_in,
  input  logic  [P-1:0]            a_vld,
  input  logic  [P-1:0]            a_first,
  input  logic  [P-1:0]            a_last,
  input  fp32_t [P-1:0]            b_in,
  output fp32_t [P-1:0][P-1:0]     res,
  output logic  [P-1:0][P-1:0]     res_clip,
  output logic                     tile_done
);
  // horizontal links: column index P is the right edge
  fp32_t       ah  [P][P+1];
  logic        avh [P][P+1];
  logic        afh [P][P+1];
  logic        alh [P][P+1];
  // vertical links: row index P is the bottom edge
  fp32_t       bv  [P+1][P];
  logic [P-1:0][P-1:0] rv;

  for (genvar i = 0; i < P; i++) begin : g_row
    assign ah[i][0]  = a_in[i];
    assign avh[i][0] = a_vld[i];
    assign afh[i][0] = a_first[i];
    assign alh[i][0] = a_last[i];
  end
  for (genvar j = 0; j < P; j++) begin : g_col
    assign bv[0][j] = b_in[j];
  end

  for (genvar i = 0; i < P; i++) begin : g_i
    for (genvar j = 0; j < P; j++) begin : g_j
      sys_pe u_pe (
        .clk, .rst_n, .relu_en,
        .a_in(ah[i][j]), .a_vld(avh[i][j]), .a_first(afh[i][j]), .a_last(alh[i][j]),
        .b_in(bv[i][j]),
        .a_out(ah[i][j+1]), .a_vld_out(avh[i][j+1]), .a_first_out(afh[i][j+1]),
        .a_last_out(alh[i][j+1]), .b_out(bv[i+1][j]),
        .res(res[i][j]), .res_clip(res_clip[i][j]), .res_valid(rv[i][j]));
    end
  end

  assign tile_done = rv[P-1][P-1];
endmodule
