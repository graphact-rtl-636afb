// tb_fp32_arith - checks the FP32 operators of graphact_pkg (fp_add, fp_mul,
// ReLU test) against an independent model: the sum or product computed in
// double precision and rounded once to FP32, which is the correctly rounded
// (round-to-nearest-even) result.  Random operands cover equal, close and
// far exponents, cancellation and both signs; directed cases cover zeros,
// infinities, NaN, overflow and underflow (flushed to zero by design).
// The functions are combinational, so there is no cycle count to check; the
// watchdog guards the loop.
module tb_fp32_arith;
  import graphact_pkg::*;
  import tb_util_pkg::*;

  int checks = 0, failures = 0;

  function automatic bit same(logic [31:0] a, logic [31:0] b);
    return (a == b) || (a[30:0] == 0 && b[30:0] == 0);
  endfunction

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp, logic [31:0] a, logic [31:0] b);
    checks++;
    if (!same(got, exp)) begin
      failures++;
      if (failures < 10) $display("FAIL %s(%h,%h) = %h exp %h", what, a, b, got, exp);
    end
  endtask

  // result lies in the normal range, where the model applies
  function automatic bit normal_res(logic [31:0] r);
    return r[30:23] != 0 && r[30:23] != 8'hFF;
  endfunction

  initial begin
    fork
      begin #1000000; $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] a, b, r;
      case (i % 4)
        0: begin a = $urandom; b = $urandom; a[30:23] = 8'(100 + $urandom_range(0, 50)); b[30:23] = 8'(100 + $urandom_range(0, 50)); end
        1: begin a = $urandom; b = a ^ 32'(1 << $urandom_range(0, 22)); b[31] = ~a[31]; end  // cancellation
        2: begin a = rand_fp(-10, 10); b = rand_fp(-10, 10); end
        default: begin a = $urandom; b = $urandom; a[30:23] = 8'(60 + $urandom_range(0, 130)); b[30:23] = 8'(60 + $urandom_range(0, 130)); end
      endcase
      // finite normal operands only (specials are tested below)
      if (a[30:23] == 8'hFF || a[30:23] == 8'h00) a[30:23] = 8'd127;
      if (b[30:23] == 8'hFF || b[30:23] == 8'h00) b[30:23] = 8'd127;
      r = ref_add(a, b);
      if (normal_res(r) || r[30:0] == 0) chk("add", fp_add(a, b), r, a, b);
      r = ref_mul(a, b);
      if (normal_res(r)) chk("mul", fp_mul(a, b), r, a, b);
    end
    // directed cases
    chk("add", fp_add(to_fp(1.0), to_fp(-1.0)), 32'h0, 0, 0);
    chk("add", fp_add(32'h0, to_fp(2.5)), to_fp(2.5), 0, 0);
    chk("add", fp_add(32'h7F80_0000, to_fp(3.0)), 32'h7F80_0000, 0, 0);
    checks++; if (fp_add(32'h7F80_0000, 32'hFF80_0000) != FP_QNAN) failures++;
    chk("mul", fp_mul(32'h7F00_0000, 32'h7F00_0000), 32'h7F80_0000, 0, 0);   // overflow
    chk("mul", fp_mul(32'h0080_0000, 32'h3E80_0000), 32'h0, 0, 0);          // underflow flushes
    chk("mul", fp_mul(32'h0, to_fp(-7.0)), 32'h8000_0000, 0, 0);
    chk("add", fp_add(to_fp(1.0), 32'h3380_0000), to_fp(1.0), 0, 0);        // tie to even
    chk("add", fp_add(32'h3F80_0001, 32'h3380_0000), 32'h3F80_0002, 0, 0);  // tie, round up
    checks++; if (fp_is_neg(32'h8000_0000) || !fp_is_neg(to_fp(-0.5)) || fp_is_neg(to_fp(0.5))) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
