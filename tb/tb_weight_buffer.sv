// tb_weight_buffer - the column-banked weight buffer with P = 4 banks.
// Host writes with random bank masks; reads use a different address per
// bank (the skewed diagonal of a weight tile) and return one cycle later.
module tb_weight_buffer;
  import graphact_pkg::*;
  localparam int P = 4, DEPTH = 256, AW = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = 0;
  logic [P-1:0] bmask = 0;
  fp32_t [P-1:0] wdata = 0, rdata;
  logic [P-1:0][AW-1:0] raddr = 0;
  logic [31:0] model[P][DEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.P(P), .DEPTH(DEPTH)) dut (.*);

  initial begin
    fork
      begin repeat (100000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); bmask = '1;
      for (int b = 0; b < P; b++) begin wdata[b] = $urandom; model[b][a] = wdata[b]; end
    end
    for (int i = 0; i < 3000; i++) begin
      logic [P-1:0][AW-1:0] ra;
      logic [31:0] exp[P];
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = AW'($urandom); bmask = P'($urandom);
      for (int b = 0; b < P; b++) wdata[b] = $urandom;
      re = 1;
      for (int b = 0; b < P; b++) begin
        ra[b] = AW'($urandom);
        if (ra[b] == waddr) ra[b] = ra[b] + 1'b1;
        exp[b] = model[b][ra[b]];
      end
      raddr = ra;
      @(posedge clk);
      if (we) for (int b = 0; b < P; b++) if (bmask[b]) model[b][waddr] = wdata[b];
      #1;
      for (int b = 0; b < P; b++) begin
        checks++;
        if (rdata[b] != exp[b]) begin failures++; if (failures < 5) $display("FAIL bank %0d", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
