// weight_buffer - weight matrix storage partitioned into P column banks.
//
// The systolic array needs, every cycle, one element of W for each of its P
// columns, each from a different row k (the skewed diagonal of a f x P tile).
// The weights are therefore split width-wise: bank j holds column
// tc*P + j of every tile column tc, at address base + k*ntc + tc, where ntc
// is the number of P-wide tile columns of the matrix.  Each bank has its own
// read address.  The host writes one row of one tile column (P values, one
// per bank) per cycle; bmask leaves banks untouched.
//
// The width-wise tiling follows the source; the bank/address mapping is
// this design's.  Timing: rdata[j] is valid one cycle after re.
module weight_buffer
  import graphact_pkg::*;
#(
  parameter int P     = 24,
  parameter int DEPTH = 8192,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic [P-1:0]        bmask,
  input  fp32_t [P-1:0]       wdata,
  input  logic                re,
  input  logic [P-1:0][AW-1:0] raddr,
  output fp32_t [P-1:0]       rdata
);
  for (genvar j = 0; j < P; j++) begin : g_bank
    sram_1r1w #(.DEPTH(DEPTH), .W(32)) u_bank (
      .clk, .we(we && bmask[j]), .waddr(waddr), .wdata(wdata[j]),
      .re, .raddr(raddr[j]), .rdata(rdata[j]));
  end
endmodule
