// tb_dgnnflow_top - end-to-end test of the DGNNFlow kernel at its default
// parameters.
//
// Loads random model weights, then runs a series of events through the
// kernel: graphs built from random particles with the distance rule
// (dR^2 < delta^2), from tiny ones up to the 70-node size of the largest
// evaluated events, with random gaps on every input stream and random
// back-pressure on the output. Every output embedding is compared with a
// two-layer integer reference model. It also drives the corner cases: an
// event with an isolated node, an event with invalid edges and one with more
// edges than a unit can hold (overflow flag). The kernel's cycle count for
// the largest event is checked against the paper's average end-to-end
// latency of 0.36 ms at 200 MHz (72,000 cycles), which includes host
// transfers the kernel does not see, so it is an upper bound.
// Mechanism counters (target selection drops, broadcast stalls, buffer
// swaps, isolated nodes, invalid edges, overflow) must all be non-zero.
module tb_dgnnflow_top;
  import dgnnflow_pkg::*;
  import dgnn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               w_we = 0;
  logic [WADDR_W-1:0] w_addr = '0;
  fx_t                w_data = '0;
  logic               start = 0;
  logic [CNT_W-1:0]   num_nodes = '0;
  logic [EDGE_W-1:0]  num_edges = '0;
  logic               busy, done;
  logic [31:0]        cycles;
  logic               x_valid = 0, x_ready;
  emb_t               x_data = '0;
  logic               e_valid = 0, e_ready;
  edge_t              e_data = '0;
  logic               y_valid, y_ready = 0;
  msg_beat_t          y_data;
  logic [EDGE_W-1:0]  bad_edges;
  logic               edge_overflow;
  logic [31:0]        cnt_selected, cnt_dropped, cnt_edges, cnt_bcast_stall, cnt_swaps;

  dgnnflow_top dut (.*);

  int checks = 0, failures = 0;
  int n_isolated = 0, n_bad = 0, n_overflow = 0;

  int W   [NUM_LAYERS][D][2*D];
  vec_t Bv[NUM_LAYERS], SC[NUM_LAYERS], SH[NUM_LAYERS];
  vec_t X [MAXN];
  vec_t Y [MAXN];
  int   EU[$], EV[$];
  int   N;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  task automatic write_weights();
    for (int l = 0; l < NUM_LAYERS; l++) begin
      for (int j = 0; j < D; j++) begin
        for (int i = 0; i < 2*D; i++) W[l][j][i] = rnd(-48, 48);
        Bv[l][j] = rnd(-64, 64);
        SC[l][j] = rnd(128, 384);
        SH[l][j] = rnd(-32, 32);
      end
    end
    for (int l = 0; l < NUM_LAYERS; l++) begin
      int base = l * LAYER_WORDS;
      for (int j = 0; j < D; j++) for (int i = 0; i < 2*D; i++) wr(base + j*2*D + i, W[l][j][i]);
      for (int j = 0; j < D; j++) begin
        wr(base + 2*D*D + j, Bv[l][j]);
        wr(base + 2*D*D + D + j, SC[l][j]);
        wr(base + 2*D*D + 2*D + j, SH[l][j]);
      end
    end
    @(posedge clk); w_we <= 0;
  endtask

  task automatic wr(int a, int v);
    @(posedge clk);
    w_we <= 1; w_addr <= WADDR_W'(a); w_data <= fx_t'(v);
  endtask

  // Host-side graph construction: edge u -> v for every ordered pair with
  // (eta_u - eta_v)^2 + (phi_u - phi_v)^2 < delta^2 (eta, phi in Q7.8).
  task automatic make_event(int n, int delta, bit isolate);
    int eta [MAXN], phi [MAXN];
    N = n;
    EU.delete(); EV.delete();
    for (int i = 0; i < n; i++) begin
      eta[i] = rnd(-640, 640);     // |eta| < 2.5
      phi[i] = rnd(-804, 804);     // |phi| < pi
      X[i][0] = eta[i];
      X[i][1] = phi[i];
      for (int d = 2; d < D; d++) X[i][d] = rnd(-512, 512);
    end
    if (isolate) begin             // node n-1 far from everything
      eta[n-1] = 4000; phi[n-1] = 4000;
    end
    for (int u = 0; u < n; u++)
      for (int v = 0; v < n; v++)
        if (u != v) begin
          longint de = eta[u] - eta[v], dp = phi[u] - phi[v];
          if (de*de + dp*dp < longint'(delta)*delta && EU.size() < MAXE) begin
            EU.push_back(u); EV.push_back(v);
          end
        end
  endtask

  // Two-layer reference, using only edges whose ends are < N.
  task automatic reference();
    vec_t cur [MAXN], nxt [MAXN];
    for (int i = 0; i < N; i++) cur[i] = X[i];
    for (int l = 0; l < NUM_LAYERS; l++) begin
      for (int u = 0; u < N; u++) begin
        vec_t agg; bit any = 0;
        for (int d = 0; d < D; d++) agg[d] = 0;
        for (int e = 0; e < EU.size(); e++)
          if (EU[e] == u && EV[e] < N) begin
            vec_t m = ref_msg(cur[u], cur[EV[e]], W[l], Bv[l]);
            for (int d = 0; d < D; d++) if (!any || m[d] > agg[d]) agg[d] = m[d];
            any = 1;
          end
        if (l == 0 && !any) n_isolated++;
        nxt[u] = ref_node(cur[u], agg, SC[l], SH[l]);
      end
      for (int i = 0; i < N; i++) cur[i] = nxt[i];
    end
    for (int i = 0; i < N; i++) Y[i] = cur[i];
  endtask

  // Runs the current event; extra_bad appends edges naming absent nodes.
  task automatic run_event(int extra_bad, bit compare, output int cyc);
    int got = 0;
    for (int k = 0; k < extra_bad; k++) begin EU.push_back(N + k); EV.push_back(0); end
    @(posedge clk);
    start <= 1; num_nodes <= CNT_W'(N); num_edges <= EDGE_W'(EU.size());
    @(posedge clk);
    start <= 0;
    fork
      begin : drive_x
        for (int i = 0; i < N; i++) begin
          while ($urandom_range(3) == 0) begin x_valid <= 0; @(posedge clk); end
          x_valid <= 1;
          for (int d = 0; d < D; d++) x_data[d] <= fx_t'(X[i][d]);
          do @(posedge clk); while (!x_ready);
        end
        x_valid <= 0;
      end
      begin : drive_e
        for (int e = 0; e < EU.size(); e++) begin
          if ($urandom_range(7) == 0) begin e_valid <= 0; @(posedge clk); end
          e_valid <= 1;
          e_data.u <= node_t'(EU[e]); e_data.v <= node_t'(EV[e]);
          do @(posedge clk); while (!e_ready);
        end
        e_valid <= 0;
      end
      begin : sink_y
        while (got < N) begin
          y_ready <= ($urandom_range(4) != 0);
          @(posedge clk);
          if (y_valid && y_ready) begin
            if (compare) begin
              check(int'(y_data.id) == got, $sformatf("output order: got node %0d expected %0d", y_data.id, got));
              for (int d = 0; d < D; d++)
                check(int'($signed(y_data.m[d])) == Y[got][d],
                      $sformatf("node %0d dim %0d: dut %0d ref %0d", got, d, $signed(y_data.m[d]), Y[got][d]));
            end
            got++;
          end
        end
        y_ready <= 0;
      end
    join
    while (!done) @(posedge clk);
    cyc = int'(cycles);
    if (extra_bad > 0) begin
      check(int'(bad_edges) == extra_bad, "invalid edges counted");
      if (int'(bad_edges) > 0) n_bad++;
    end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, big_cyc;
    int sizes [6] = '{1, 5, 18, 32, 50, 70};
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_weights();

    foreach (sizes[s]) begin
      make_event(sizes[s], 320, s == 3);
      reference();
      run_event(0, 1, cyc);
      $display("event N=%0d E=%0d: %0d cycles", N, EU.size(), cyc);
      if (sizes[s] == 70) big_cyc = cyc;
    end
    // densest evaluated size: about 770 edges on 70 nodes
    make_event(70, 400, 0);
    reference();
    run_event(0, 1, cyc);
    $display("event N=%0d E=%0d: %0d cycles", N, EU.size(), cyc);
    check(cyc < 72000, $sformatf("dense 70-node event takes %0d cycles, paper average E2E is 72000", cyc));
    // invalid edges are dropped, the rest of the event is still correct
    make_event(24, 320, 0);
    reference();
    run_event(3, 1, cyc);

    check(big_cyc > 0 && big_cyc < 72000, $sformatf("70-node event takes %0d cycles, paper average E2E is 72000", big_cyc));

    // more edges than one unit holds: all from node 0 (unit 0)
    N = 8; EU.delete(); EV.delete();
    for (int i = 0; i < 8; i++) for (int d = 0; d < D; d++) X[i][d] = rnd(-256, 256);
    for (int e = 0; e < MAXE + 4; e++) begin EU.push_back(0); EV.push_back(1 + e % 7); end
    run_event(0, 0, cyc);
    check(edge_overflow, "edge overflow flagged");
    if (edge_overflow) n_overflow++;

    $display("mechanisms: selected=%0d dropped=%0d edges=%0d bcast_stall=%0d swaps=%0d isolated=%0d bad=%0d overflow=%0d",
             cnt_selected, cnt_dropped, cnt_edges, cnt_bcast_stall, cnt_swaps, n_isolated, n_bad, n_overflow);
    check(cnt_selected > 0, "target selection kept beats");
    check(cnt_dropped > 0,  "target selection dropped beats");
    check(cnt_edges > 0,    "messages computed");
    check(cnt_bcast_stall > 0, "broadcast stalled on a full MP FIFO");
    check(cnt_swaps >= 2,   "NE buffers swapped");
    check(n_isolated > 0,   "isolated node seen");
    check(n_bad > 0,        "invalid edges seen");
    check(n_overflow > 0,   "overflow seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
