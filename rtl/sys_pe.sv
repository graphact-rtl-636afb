// sys_pe - processing element of the weight-transformation systolic array.
//
// Each PE multiplies the X value arriving from its left neighbour by the W
// value arriving from above and accumulates the product (output-stationary
// dot product).  X moves one PE to the right and W one PE down per cycle.
// The X operand carries three tags: valid, first (k = 0) and last
// (k = K-1).  On the last product the PE publishes the finished dot product,
// after the ReLU comparator: a negative result is clipped to zero when
// relu_en is set, and the status bit res_clip records whether it was
// clipped (the backward pass's mask() reads this bit).
//
// The multiply-accumulate with a comparator and status bit follows the
// source; the tag scheme and the flow directions are this design's.
// Timing: all outputs are registered; res/res_clip change, with a one-cycle
// res_valid pulse, the cycle after the last product enters the PE, and hold
// until the next tile's last product.
module sys_pe
  import graphact_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  relu_en,
  input  fp32_t a_in,
  input  logic  a_vld,
  input  logic  a_first,
  input  logic  a_last,
  input  fp32_t b_in,
  output fp32_t a_out,
  output logic  a_vld_out,
  output logic  a_first_out,
  output logic  a_last_out,
  output fp32_t b_out,
  output fp32_t res,
  output logic  res_clip,
  output logic  res_valid
);
  fp32_t acc, prod, sum;

  always_comb begin
    prod = fp_mul(a_in, b_in);
    sum  = fp_add(a_first ? FP_ZERO : acc, prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc         <= FP_ZERO;
      a_out       <= FP_ZERO;
      b_out       <= FP_ZERO;
      a_vld_out   <= 1'b0;
      a_first_out <= 1'b0;
      a_last_out  <= 1'b0;
      res         <= FP_ZERO;
      res_clip    <= 1'b0;
      res_valid   <= 1'b0;
    end else begin
      a_out       <= a_in;
      b_out       <= b_in;
      a_vld_out   <= a_vld;
      a_first_out <= a_first;
      a_last_out  <= a_last;
      res_valid   <= 1'b0;
      if (a_vld) begin
        acc <= sum;
        if (a_last) begin
          res_valid <= 1'b1;
          res_clip  <= relu_en && fp_is_neg(sum);
          res       <= (relu_en && fp_is_neg(sum)) ? FP_ZERO : sum;
        end
      end
    end
  end
endmodule
