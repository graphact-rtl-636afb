// tb_tile_buffer - the tile buffer with P = 4 rows and 2 chunks (256
// features per row).  Fills the rows chunk by chunk, then issues random
// per-row feature indices with random valid bits: each row must return its
// own feature one cycle later, or zero where valid was low.
module tb_tile_buffer;
  import graphact_pkg::*;
  localparam int P = 4, NCH = 2;
  localparam int KW = $clog2(NCH * P_AGG), RW = 2, CW = 1;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [RW-1:0] wrow = 0;
  logic [CW-1:0] wchunk = 0;
  fvec_t wdata = 0;
  logic [P-1:0][KW-1:0] rk = 0;
  logic [P-1:0] rvalid = 0;
  fp32_t [P-1:0] rdata;
  logic [31:0] model[P][NCH * P_AGG];
  int checks = 0, failures = 0;

  tile_buffer #(.P(P), .NCH(NCH)) dut (.*);

  initial begin
    fork
      begin repeat (100000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    for (int rep = 0; rep < 3; rep++) begin
      for (int r = 0; r < P; r++)
        for (int c = 0; c < NCH; c++) begin
          @(negedge clk);
          we = 1; wrow = RW'(r); wchunk = CW'(c);
          for (int l = 0; l < P_AGG; l++) begin wdata[l] = $urandom; model[r][c * P_AGG + l] = wdata[l]; end
        end
      @(negedge clk); we = 0;
      for (int i = 0; i < 500; i++) begin
        logic [P-1:0][KW-1:0] k;
        logic [P-1:0] vl;
        @(negedge clk);
        re = 1;
        for (int r = 0; r < P; r++) begin
          k[r] = KW'($urandom_range(0, NCH * P_AGG - 1)); vl[r] = $urandom_range(0, 3) != 0;
        end
        rk = k; rvalid = vl;
        @(posedge clk); #1;
        for (int r = 0; r < P; r++) begin
          checks++;
          if (rdata[r] != (vl[r] ? model[r][k[r]] : 32'd0)) begin
            failures++; if (failures < 5) $display("FAIL row %0d k %0d", r, k[r]);
          end
        end
      end
      @(negedge clk); re = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
