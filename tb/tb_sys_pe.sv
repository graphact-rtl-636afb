// tb_sys_pe - one processing element.  Streams random dot products of
// length K (1..20) through the PE, one multiply-accumulate per cycle, back to
// back (the next product's first element follows the previous last one).
// Checks the result against a model (same order, correctly rounded FP32),
// the ReLU clip and its status bit, the one-cycle res_valid pulse one cycle
// after the last element, and the one-cycle pass-through of a, its tags and b.
module tb_sys_pe;
  import graphact_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic relu_en = 0, a_vld = 0, a_first = 0, a_last = 0;
  fp32_t a_in = 0, b_in = 0, a_out, b_out, res;
  logic a_vld_out, a_first_out, a_last_out, res_clip, res_valid;
  int checks = 0, failures = 0, clips = 0;

  sys_pe dut (.*);

  initial begin
    fork
      begin repeat (100000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < 400; d++) begin
      int K;
      logic [31:0] acc;
      logic        clip;
      K = $urandom_range(1, 20);
      relu_en = $urandom_range(0, 1);
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        if (k > 0 || d == 0) begin
          checks++;
          if (res_valid) begin failures++; $display("FAIL res_valid early"); end
        end
        a_in = rand_fp(-8, 0); b_in = rand_fp(-8, 0);
        a_vld = 1; a_first = (k == 0); a_last = (k == K - 1);
        acc = (k == 0) ? ref_mul(a_in, b_in) : ref_add(acc, ref_mul(a_in, b_in));
        @(posedge clk); #1;
        checks++;
        if (a_out != a_in || b_out != b_in || a_vld_out != 1'b1 || a_first_out != (k == 0)
            || a_last_out != (k == K - 1)) begin
          failures++; $display("FAIL pass-through");
        end
      end
      clip = relu_en && acc[31] && acc[30:23] != 0;
      if (clip) clips++;
      checks++;
      if (!res_valid || res_clip != clip || !((res == (clip ? 32'd0 : acc)) ||
          (res[30:0] == 0 && acc[30:0] == 0))) begin
        failures++;
        $display("FAIL dot %0d K=%0d got %h/%b/%b exp %h/%b", d, K, res, res_clip, res_valid, acc, clip);
      end
      if ($urandom_range(0, 3) == 0) begin   // idle gap: no valid, result holds
        @(negedge clk); a_vld = 0; a_first = 0; a_last = 0;
        @(posedge clk); #1;
        checks++;
        if (res_valid || res_clip != clip) begin failures++; $display("FAIL hold"); end
      end
    end
    checks++; if (clips == 0) begin failures++; $display("FAIL no clip seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
