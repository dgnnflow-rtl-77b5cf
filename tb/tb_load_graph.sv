// tb_load_graph - streams random edge lists (with gaps and some edges that
// name absent nodes) into load_graph. Checks that each valid edge is handed
// to unit u % P_EDGE as row u / P_EDGE with its v, that invalid ones are
// counted and not forwarded, that clear precedes the edges, that build is
// raised once after the last edge and that done waits for every table's
// done (returned by the testbench with random delays).
module tb_load_graph;
  import dgnnflow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, e_valid = 0, e_ready, tbl_clear, tbl_build;
  logic [CNT_W-1:0] num_nodes = '0;
  logic [EDGE_W-1:0] num_edges = '0, bad_edges;
  edge_t e_data = '0;
  logic [P_EDGE-1:0] tbl_valid, tbl_done = '0;
  logic [ROW_W-1:0] tbl_urow;
  node_t tbl_v;
  load_graph dut (.*);

  int checks = 0, failures = 0, clears = 0, builds = 0, fwd = 0;
  edge_t exp_q [$];
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (tbl_clear) clears++;
    if (tbl_build) builds++;
    if (tbl_valid != '0) begin
      edge_t e;
      e = exp_q.pop_front();
      fwd++;
      check($onehot(tbl_valid), "one unit at a time");
      check(tbl_valid[int'(e.u) % P_EDGE], "routed to unit u % P_EDGE");
      check(int'(tbl_urow) == int'(e.u) / P_EDGE && tbl_v == e.v, "row and target");
      check(clears == 1 && builds == 0, "clear before edges, build after");
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      int n, ne, nbad, delay;
      n = 10 + run * 40; ne = 50 + run * 200; nbad = 0;
      clears = 0; builds = 0; fwd = 0; exp_q.delete();
      @(negedge clk); start = 1; num_nodes = CNT_W'(n); num_edges = EDGE_W'(ne);
      @(negedge clk); start = 0;
      for (int i = 0; i < ne; i++) begin
        edge_t e;
        e.u = node_t'($urandom_range(n - 1)); e.v = node_t'($urandom_range(n - 1));
        if ($urandom_range(19) == 0) begin e.u = node_t'(n); nbad++; end
        else exp_q.push_back(e);
        while ($urandom_range(3) == 0) begin e_valid = 0; @(negedge clk); end
        e_valid = 1; e_data = e;
        @(posedge clk); while (!e_ready) @(posedge clk);
        @(negedge clk);
      end
      e_valid = 0;
      while (builds == 0) @(negedge clk);
      // tables finish at different times
      for (int b = 0; b < P_EDGE; b++) begin
        delay = $urandom_range(5);
        repeat (delay) @(negedge clk);
        check(!done, "done waits for all tables");
        tbl_done[b] = 1; @(negedge clk); tbl_done[b] = 0;
      end
      repeat (2) @(negedge clk);
      check(!busy, "idle after done");
      check(int'(bad_edges) == nbad, $sformatf("bad edges %0d vs %0d", bad_edges, nbad));
      check(exp_q.size() == 0 && builds == 1, "all valid edges forwarded, one build");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
