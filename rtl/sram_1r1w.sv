// sram_1r1w - simple dual-port RAM (one write port, one read port).
//
// Used for the matched-pair list M_a, for the weight banks and, inside
// topo_buffer, for the neighbour lists and degree coefficients of the reduced
// subgraph.  It maps onto one block RAM column of the target FPGA.
//
// Interface: a write of wdata at waddr when we is high; a read of raddr when
// re is high.  Timing: rdata is registered and valid the cycle after re; it
// keeps its value while re is low, so a consumer may stall without losing a
// word.  A read of the address being written returns the old word.
// Reset is not needed: the contents are written by the host before use.
module sram_1r1w #(
  parameter int DEPTH = 8000,
  parameter int W     = 28,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
