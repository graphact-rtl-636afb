// feature_buffer - on-chip buffer of node feature vectors, feature-major.
//
// One word holds LANES consecutive features of one node, so a single read
// gives the accumulator array a whole 128-feature slice of a node vector.
// A vector of f features occupies ceil(f/LANES) consecutive words, at
// address node*chunks + chunk.  The source design stores "the full feature
// vector of one node" per read; splitting it into 128-lane chunks is this
// design's choice, made so that the 128-lane accumulator array can also
// process the 602-feature inputs of the largest dataset.
//
// The same module with LW = 1 keeps the ReLU status bits of a feature
// buffer (one bit per feature).
//
// Interface: write port (we, waddr, wmask, wdata) writes only the lanes whose
// wmask bit is set; read port (re, raddr) returns rdata one cycle later and
// holds it while re is low.  Contents are not reset.
module feature_buffer #(
  parameter int DEPTH = 8192,
  parameter int LANES = 128,
  parameter int LW    = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [LANES-1:0]          wmask,
  input  logic [LANES-1:0][LW-1:0]  wdata,
  input  logic                      re,
  input  logic [AW-1:0]             raddr,
  output logic [LANES-1:0][LW-1:0]  rdata
);
  logic [LANES-1:0][LW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      for (int l = 0; l < LANES; l++)
        if (wmask[l]) mem[waddr][l] <= wdata[l];
    if (re) rdata <= mem[raddr];
  end
endmodule
