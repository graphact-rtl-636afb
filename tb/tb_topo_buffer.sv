// tb_topo_buffer - the topology buffer (end pointers, neighbour indices,
// 1/deg).  Writes random contents through the shared host port, then reads
// them back through the node and edge ports: one-cycle latency, data held
// while the enable is low, both ports used in the same cycle.
module tb_topo_buffer;
  import graphact_pkg::*;
  localparam int NODES_MAX = 4000, EDGES_MAX = 65536;
  localparam int NAW = $clog2(NODES_MAX), EAW = $clog2(EDGES_MAX);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we_endptr = 0, we_colidx = 0, we_dinv = 0, re_node = 0, re_edge = 0;
  logic [CNT_W-1:0] waddr = 0;
  logic [31:0] wdata = 0;
  logic [NAW-1:0] rnode = 0;
  logic [EAW-1:0] redge = 0;
  logic [CNT_W-1:0] end_ptr;
  fp32_t dinv;
  node_t col_idx;
  int checks = 0, failures = 0;
  logic [CNT_W-1:0] m_ptr[int];
  logic [31:0]      m_dinv[int];
  node_t            m_col[int];

  topo_buffer dut (.*);

  initial begin
    int nodes[$], edges[$];
    fork
      begin repeat (100000) @(posedge clk); $display("WATCHDOG"); failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    join_none
    for (int i = 0; i < 300; i++) begin
      int v, e;
      v = $urandom_range(0, NODES_MAX - 1); e = $urandom_range(0, EDGES_MAX - 1);
      @(negedge clk);
      we_endptr = 1; waddr = CNT_W'(v); wdata = $urandom; m_ptr[v] = wdata[CNT_W-1:0];
      @(negedge clk);
      we_endptr = 0; we_dinv = 1; wdata = $urandom; m_dinv[v] = wdata;
      @(negedge clk);
      we_dinv = 0; we_colidx = 1; waddr = CNT_W'(e); wdata = $urandom; m_col[e] = wdata[NODE_W-1:0];
      nodes.push_back(v); edges.push_back(e);
    end
    @(negedge clk); we_colidx = 0;
    foreach (nodes[i]) begin
      @(negedge clk);
      re_node = 1; rnode = NAW'(nodes[i]); re_edge = 1; redge = EAW'(edges[i]);
      @(negedge clk);
      re_node = 0; re_edge = 0; rnode = '0; redge = '0;
      checks++;
      if (end_ptr != m_ptr[nodes[i]] || dinv != m_dinv[nodes[i]] || col_idx != m_col[edges[i]]) begin
        failures++; $display("FAIL entry %0d/%0d", nodes[i], edges[i]);
      end
      @(negedge clk);   // held
      checks++;
      if (end_ptr != m_ptr[nodes[i]] || col_idx != m_col[edges[i]]) begin
        failures++; $display("FAIL hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
