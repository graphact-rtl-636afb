// accum_array - the 1D accumulator array of the feature aggregation module.
//
// LANES independent FP32 accumulators, one per feature of a buffer word.  The
// array sums node vectors lane by lane; it works along the feature
// dimension only, so every lane does the same operation each cycle and the
// array never suffers bank conflicts or load imbalance.  After a neighbour
// list is summed, the SCALE operation multiplies every lane by the node's
// coefficient 1/deg(v).
//
// Operations (op, applied at the clock edge):
//   ACC_NOP    hold;  ACC_LOAD  acc = din;  ACC_ADD  acc = acc + din;
//   ACC_SCALE  acc = acc * coef;  ACC_ZERO  acc = 0.
// Timing: acc shows the result the cycle after the operation.
//
// Lint note: ACC_NOP names the idle operation code. The case statement
// handles it by its default branch, so the constant itself is never read.
module accum_array
  import graphact_pkg::*;
#(
  parameter int LANES = 128
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [2:0]            op,
  input  fp32_t [LANES-1:0]     din,
  input  fp32_t                 coef,
  output fp32_t [LANES-1:0]     acc
);
  localparam logic [2:0] ACC_NOP = 3'd0, ACC_LOAD = 3'd1, ACC_ADD = 3'd2,
                         ACC_SCALE = 3'd3, ACC_ZERO = 3'd4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else
      for (int l = 0; l < LANES; l++)
        unique case (op)
          ACC_LOAD:  acc[l] <= din[l];
          ACC_ADD:   acc[l] <= fp_add(acc[l], din[l]);
          ACC_SCALE: acc[l] <= fp_mul(acc[l], coef);
          ACC_ZERO:  acc[l] <= FP_ZERO;
          default:   ;
        endcase
  end
endmodule
