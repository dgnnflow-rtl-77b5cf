// tb_mp_graph_table - loads random edge sets, builds, and checks every
// degree, every CSR offset (prefix sum) and every neighbour list (as a
// multiset) against a model; checks that build takes N + E + 3 cycles and
// that a second, cleared graph does not see the first; finally loads more
// than MAX_EDGES edges and checks the overflow flag.
module tb_mp_graph_table;
  import dgnnflow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, edge_valid = 0, build = 0, done, overflow;
  logic [ROW_W-1:0] edge_urow = '0, q_urow;
  node_t edge_v = '0, q_v = '0;
  logic [CNT_W-1:0] num_nodes = '0;
  logic [EDGE_W-1:0] num_edges, q_deg, q_off, q_k = '0;
  mp_graph_table dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_graph(int n, int e);
    int eu [$], ev [$];
    int deg [MAX_NODES];
    int cyc, off;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < MAX_NODES; i++) deg[i] = 0;
    for (int i = 0; i < e; i++) begin
      eu.push_back($urandom_range(ROWS-1)); ev.push_back($urandom_range(n-1));
      deg[ev[i]]++;
      edge_valid = 1; edge_urow = ROW_W'(eu[i]); edge_v = node_t'(ev[i]);
      @(negedge clk);
    end
    edge_valid = 0;
    check(int'(num_edges) == e, "edge count");
    build = 1; num_nodes = CNT_W'(n); @(negedge clk); build = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == n + e + 3, $sformatf("build took %0d cycles, expected %0d", cyc, n + e + 3));
    off = 0;
    for (int v = 0; v < n; v++) begin
      int want [$], got [$];
      q_v = node_t'(v); #1;
      check(int'(q_deg) == deg[v], "degree");
      check(int'(q_off) == off, "offset");
      for (int i = 0; i < e; i++) if (ev[i] == v) want.push_back(eu[i]);
      for (int k = 0; k < deg[v]; k++) begin q_k = EDGE_W'(off + k); #1; got.push_back(int'(q_urow)); end
      want.sort(); got.sort();
      check(want == got, $sformatf("neighbours of %0d", v));
      off += deg[v];
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run_graph(20, 60);
    run_graph(70, 300);
    run_graph(128, MAX_EDGES);
    check(!overflow, "no overflow at capacity");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < MAX_EDGES + 2; i++) begin
      edge_valid = 1; edge_v = node_t'(i % 5); @(negedge clk);
    end
    edge_valid = 0; @(negedge clk);
    check(overflow, "overflow flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
