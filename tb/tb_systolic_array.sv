// tb_systolic_array - a 4 x 4 array (P reduced from 24 to keep the run
// short; the array is a generate grid, so P only sets its size).  The test
// skews tiles exactly as the weight-transformation module does: row i gets
// A[i][t-i], column j gets W[t-j][j], for t = 0 .. K+P-2, and the next tile
// starts right after (back to back).  Checks all P*P results and clip bits
// against a model, that tile_done rises exactly K+2P-3 cycles after the
// first diagonal entered (the last PE's last product plus its register), and
// that each tile occupies the inputs for K+P-1 cycles.
module tb_systolic_array;
  import graphact_pkg::*;
  import tb_util_pkg::*;
  localparam int P = 4;
  localparam int T = 30;   // tiles
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic relu_en = 0;
  fp32_t [P-1:0] a_in, b_in;
  logic [P-1:0] a_vld, a_first, a_last;
  fp32_t [P-1:0][P-1:0] res;
  logic [P-1:0][P-1:0] res_clip;
  logic tile_done;
  int checks = 0, failures = 0, clips = 0;

  systolic_array #(.P(P)) dut (.*);

  logic [31:0] A[T][P][32], W[T][32][P];
  int          K[T], t0[T];
  bit          relu[T];
  int          cyc = 0, done_seen = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // checker: tiles finish in order
  always @(posedge clk) begin
    #1;
    if (tile_done) begin
      int tt;
      tt = done_seen;
      checks++;
      if (cyc - 1 - t0[tt] != K[tt] + 2 * P - 3) begin
        failures++; $display("FAIL tile %0d done after %0d cycles exp %0d", tt, cyc - 1 - t0[tt], K[tt] + 2 * P - 3);
      end
      for (int i = 0; i < P; i++)
        for (int j = 0; j < P; j++) begin
          logic [31:0] acc;
          logic clip;
          for (int k = 0; k < K[tt]; k++)
            acc = (k == 0) ? ref_mul(A[tt][i][k], W[tt][k][j]) : ref_add(acc, ref_mul(A[tt][i][k], W[tt][k][j]));
          clip = relu[tt] && acc[31] && acc[30:23] != 0;
          if (clip) clips++;
          checks++;
          if (res_clip[i][j] != clip || !((res[i][j] == (clip ? 32'd0 : acc)) ||
              (res[i][j][30:0] == 0 && acc[30:0] == 0))) begin
            failures++;
            $display("FAIL tile %0d pe %0d,%0d got %h exp %h", tt, i, j, res[i][j], acc);
          end
        end
      done_seen++;
    end
  end

  initial begin
    fork
      begin repeat (100000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    for (int tt = 0; tt < T; tt++) begin
      K[tt] = (tt < T - 4) ? $urandom_range(P + 1, 32) : $urandom_range(1, P);
      relu[tt] = (tt < T - 4);   // fixed within a back-to-back run, as in an operation
      for (int i = 0; i < P; i++) for (int k = 0; k < 32; k++) A[tt][i][k] = rand_fp(-6, 0);
      for (int k = 0; k < 32; k++) for (int j = 0; j < P; j++) W[tt][k][j] = rand_fp(-6, 0);
    end
    a_in = '0; b_in = '0; a_vld = '0; a_first = '0; a_last = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int tt = 0; tt < T; tt++) begin
      // a tile with K <= P must wait until the previous one is read out
      if (K[tt] <= P) repeat (2 * P) @(negedge clk);
      relu_en = relu[tt];
      t0[tt] = cyc;
      for (int t = 0; t < K[tt] + P - 1; t++) begin
        for (int i = 0; i < P; i++) begin
          int k;
          k = t - i;
          a_vld[i]   = (k >= 0 && k < K[tt]);
          a_first[i] = (k == 0);
          a_last[i]  = (k == K[tt] - 1);
          a_in[i]    = a_vld[i] ? A[tt][i][k] : 32'd0;
          k = t - i;   // column i uses the same skew
          b_in[i]    = (k >= 0 && k < K[tt]) ? W[tt][k][i] : 32'd0;
        end
        @(negedge clk);
      end
      a_vld = '0; a_first = '0; a_last = '0;
    end
    repeat (3 * P) @(negedge clk);
    checks++; if (done_seen != T) begin failures++; $display("FAIL %0d tiles done", done_seen); end
    checks++; if (clips == 0) begin failures++; $display("FAIL no clip"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
