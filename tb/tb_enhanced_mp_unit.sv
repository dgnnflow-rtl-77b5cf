// tb_enhanced_mp_unit - one Enhanced MP Unit (UNIT = 1) on its own.
//
// Builds the unit's graph table from random edges whose sources it owns
// (u % P_EDGE == 1), models its bank of the Input NE buffer as an array,
// then plays the broadcast stream (all N nodes and the end token, with random
// gaps) and collects the expanded messages with random back-pressure. Checks:
// one message per owned node in node order, each equal to the reference
// max-pool of phi(x_u, x_v - x_u) over u's edges (zero if none); the number of
// selected / dropped broadcast beats equals the number of targets with /
// without edges in this unit; an edge takes 1 + EMB_DIM cycles (gather cycles
// counted while no beat is waiting is (1 + EMB_DIM) * edges). A second layer
// with new embeddings checks that the aggregates were cleared.
module tb_enhanced_mp_unit;
  import dgnnflow_pkg::*;
  import dgnn_ref_pkg::*;
  localparam int U = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [CNT_W-1:0] num_nodes = '0;
  logic tbl_clear = 0, tbl_valid = 0, tbl_build = 0, tbl_done, tbl_overflow;
  logic [ROW_W-1:0] tbl_urow = '0, src_raddr;
  node_t tbl_v = '0;
  logic bc_valid = 0, bc_ready, msg_valid, msg_ready = 0;
  bcast_beat_t bc_data = '0;
  emb_t src_rdata, b;
  wmat_t w;
  msg_beat_t msg_data;
  logic [31:0] cnt_selected, cnt_dropped, cnt_edges;
  enhanced_mp_unit #(.UNIT(U)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  localparam int N = 41;
  vec_t X [MAXN];
  emb_t bank [ROWS];
  int Wi [D][2*D];
  vec_t Bi;
  int EU [$], EV [$];
  assign src_rdata = bank[src_raddr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic one_layer();
    int want_sel = 0, want_drop = 0, sel0, drop0, edges0, got = 0, gather_cyc = 0;
    int nxt = U;
    bit needed [MAXN];
    for (int i = 0; i < N; i++) begin
      for (int d = 0; d < D; d++) X[i][d] = int'($urandom_range(1024)) - 512;
      if (i % P_EDGE == U) for (int d = 0; d < D; d++) bank[i / P_EDGE][d] = fx_t'(X[i][d]);
      needed[i] = 0;
    end
    foreach (EV[e]) needed[EV[e]] = 1;
    for (int i = 0; i < N; i++) if (needed[i]) want_sel++; else want_drop++;
    sel0 = int'(cnt_selected); drop0 = int'(cnt_dropped); edges0 = int'(cnt_edges);
    fork
      begin
        for (int v = 0; v <= N; v++) begin
          @(negedge clk);
          while ($urandom_range(3) == 0) begin bc_valid = 0; @(negedge clk); end
          bc_valid = 1; bc_data.last = (v == N); bc_data.id = node_t'(v % N);
          for (int d = 0; d < D; d++) bc_data.x[d] = fx_t'(X[v % N][d]);
          @(posedge clk); while (!bc_ready) @(posedge clk);
        end
        @(negedge clk); bc_valid = 0;
      end
      begin
        while (nxt < N) begin
          @(negedge clk);
          msg_ready = ($urandom_range(2) != 0);
          @(posedge clk);
          if (msg_valid && msg_ready) begin
            vec_t agg; bit any = 0;
            for (int d = 0; d < D; d++) agg[d] = 0;
            foreach (EU[e]) if (EU[e] == nxt) begin
              vec_t m = ref_msg(X[nxt], X[EV[e]], Wi, Bi);
              for (int d = 0; d < D; d++) if (!any || m[d] > agg[d]) agg[d] = m[d];
              any = 1;
            end
            check(int'(msg_data.id) == nxt, $sformatf("message order %0d vs %0d", msg_data.id, nxt));
            for (int d = 0; d < D; d++)
              check(int'($signed(msg_data.m[d])) == agg[d], $sformatf("node %0d dim %0d", nxt, d));
            nxt += P_EDGE;
          end
        end
        @(negedge clk); msg_ready = 0;
      end
      begin
        while (nxt < N) begin
          @(posedge clk);
          if (dut.state == 3'd1 || dut.state == 3'd2) gather_cyc++;
        end
      end
    join
    check(int'(cnt_selected) - sel0 == want_sel, "selected beats");
    check(int'(cnt_dropped) - drop0 == want_drop, "dropped beats");
    check(int'(cnt_edges) - edges0 == EU.size(), "edges processed");
    check(gather_cyc == (1 + D) * EU.size(), $sformatf("gather cycles %0d, expected %0d", gather_cyc, (1 + D) * EU.size()));
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int j = 0; j < D; j++) begin
      for (int i = 0; i < 2*D; i++) begin Wi[j][i] = int'($urandom_range(96)) - 48; w[j][i] = fx_t'(Wi[j][i]); end
      Bi[j] = int'($urandom_range(128)) - 64; b[j] = fx_t'(Bi[j]);
    end
    num_nodes = CNT_W'(N);
    // edges of this unit: sources u with u % P_EDGE == U
    for (int k = 0; k < 60; k++) begin
      EU.push_back(P_EDGE * int'($urandom_range((N - 1 - U) / P_EDGE)) + U);
      EV.push_back(int'($urandom_range(N / 2)));      // upper half of targets never needed
    end
    @(negedge clk); tbl_clear = 1; @(negedge clk); tbl_clear = 0;
    foreach (EU[e]) begin
      tbl_valid = 1; tbl_urow = ROW_W'(EU[e] / P_EDGE); tbl_v = node_t'(EV[e]); @(negedge clk);
    end
    tbl_valid = 0; tbl_build = 1; @(negedge clk); tbl_build = 0;
    while (!tbl_done) @(negedge clk);
    one_layer();
    one_layer();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
