// tb_accum_array - the 128-lane accumulator array of the aggregation
// module.  Random sequences of LOAD, ADD, SCALE, ZERO and NOP; after every
// cycle each lane is compared with a model using correctly rounded FP32
// sum and product.  One operation per cycle is the array's rate.
module tb_accum_array;
  import graphact_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] op = 0;
  fvec_t din = 0, acc, model;
  fp32_t coef = 0;
  int checks = 0, failures = 0;

  accum_array dut (.clk, .rst_n, .op, .din, .coef, .acc);

  initial begin
    fork
      begin repeat (100000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      op = (i % 20 == 0) ? 3'd1 : 3'($urandom_range(0, 4));
      if (i % 20 == 19) op = 3'd4;
      for (int l = 0; l < P_AGG; l++) din[l] = rand_fp(-6, -2);
      coef = to_fp(1.0 / real'($urandom_range(1, 30)));
      case (op)
        3'd1: model = din;
        3'd2: for (int l = 0; l < P_AGG; l++) model[l] = ref_add(model[l], din[l]);
        3'd3: for (int l = 0; l < P_AGG; l++) model[l] = ref_mul(model[l], coef);
        3'd4: model = '0;
        default: ;
      endcase
      @(posedge clk); #1;
      for (int l = 0; l < P_AGG; l++) begin
        checks++;
        if (acc[l] != model[l] && !(acc[l][30:0] == 0 && model[l][30:0] == 0)) begin
          failures++;
          if (failures < 5) $display("FAIL op %0d lane %0d got %h exp %h", op, l, acc[l], model[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
