// tb_feature_buffer - the 128-lane feature buffer (X^(l), aggregation,
// X_M and output buffers).  Random writes with random lane masks against a
// model; reads are checked one cycle after the request (registered read).
// Small depth (64 words) so that words are rewritten often.
module tb_feature_buffer;
  import graphact_pkg::*;
  localparam int DEPTH = 64, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  lmask_t wmask = 0;
  fvec_t  wdata = 0, rdata;
  fvec_t  model [DEPTH];
  int checks = 0, failures = 0;

  feature_buffer #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    fork
      begin repeat (100000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    // initialise every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wmask = '1;
      for (int l = 0; l < P_AGG; l++) wdata[l] = $urandom;
      model[a] = wdata;
    end
    for (int i = 0; i < 5000; i++) begin
      fvec_t exp;
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = AW'($urandom);
      for (int l = 0; l < P_AGG; l++) begin wdata[l] = $urandom; wmask[l] = $urandom_range(0, 1); end
      re = 1; raddr = AW'($urandom);
      if (raddr == waddr) re = 0;
      exp = model[raddr];
      @(posedge clk);
      if (we) for (int l = 0; l < P_AGG; l++) if (wmask[l]) model[waddr][l] = wdata[l];
      #1;
      if (re) begin
        checks++;
        if (rdata !== exp) begin failures++; if (failures < 5) $display("FAIL word %0d", raddr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
