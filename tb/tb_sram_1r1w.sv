// tb_sram_1r1w - random writes and reads of the one-read one-write RAM used
// for the pair list (default size: 8000 pairs of two 14-bit node indices).
// Checks the one-cycle read latency, that rdata holds while re is low, and
// that a read and a write in the same cycle work on different addresses.
module tb_sram_1r1w;
  localparam int DEPTH = 8000, W = 28, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [W-1:0]  wdata = 0, rdata;
  logic [W-1:0]  model [DEPTH];
  bit            valid [DEPTH];
  int checks = 0, failures = 0;

  sram_1r1w #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    fork
      begin repeat (200000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    for (int i = 0; i < 20000; i++) begin
      logic [W-1:0] exp;
      logic         do_rd;
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = AW'($urandom_range(0, DEPTH - 1)); wdata = W'($urandom);
      re = $urandom_range(0, 1); raddr = AW'($urandom_range(0, DEPTH - 1));
      if (raddr == waddr) re = 0;
      do_rd = re && valid[raddr];
      exp = model[raddr];
      if (re) exp = model[raddr];
      @(posedge clk);
      if (we) begin model[waddr] = wdata; valid[waddr] = 1; end
      #1;
      if (do_rd) begin
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL addr %0d got %h exp %h", raddr, rdata, exp); end
      end
      if (do_rd) begin   // hold while re stays low for one cycle
        @(negedge clk); we = 0; re = 0;
        @(posedge clk); #1;
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
