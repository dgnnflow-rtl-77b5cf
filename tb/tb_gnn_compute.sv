// tb_gnn_compute - the layer engine on its own. The testbench plays the
// loaders: it writes the node embeddings into buffer A, feeds every edge to
// its unit's graph table and raises build; then it starts two layers with
// different weights and, after each, reads the new embeddings back through
// the readout port and compares them with the reference layer. Checks the
// buffer swap (in_sel toggles per layer), that broadcast stalls and
// selection drops happen, and the cycle count of a layer against bounds
// from the structure: at least the copy (N cycles) plus (1 + EMB_DIM)
// cycles per edge of the busiest unit; at most that plus the broadcast,
// expansion and drain (2N + 32 allowed), well below running the units one
// after another.
module tb_gnn_compute;
  import dgnnflow_pkg::*;
  import dgnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [CNT_W-1:0] num_nodes = '0;
  logic tbl_clear = 0, tbl_build = 0;
  logic [P_EDGE-1:0] tbl_valid = '0, tbl_done, tbl_overflow, ld_we = '0;
  logic [ROW_W-1:0] tbl_urow = '0, ld_waddr = '0;
  node_t tbl_v = '0;
  emb_t ld_wdata = '0, b, bn_scale, bn_shift;
  logic [P_EDGE-1:0][ROW_W-1:0] fin_raddr = '0;
  emb_t [P_EDGE-1:0] fin_rdata;
  wmat_t w;
  logic bufsel_reset = 0, start_layer = 0, layer_done, in_sel;
  logic [31:0] cnt_selected, cnt_dropped, cnt_edges, cnt_bcast_stall;
  gnn_compute dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  localparam int N = 45;
  vec_t X [MAXN], NX [MAXN];
  int Wi [D][2*D];
  vec_t Bi, Si, Hi;
  int EU [$], EV [$];
  int per_unit [P_EDGE];

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic set_weights();
    for (int j = 0; j < D; j++) begin
      for (int i = 0; i < 2*D; i++) begin Wi[j][i] = int'($urandom_range(96)) - 48; w[j][i] = fx_t'(Wi[j][i]); end
      Bi[j] = int'($urandom_range(128)) - 64; b[j] = fx_t'(Bi[j]);
      Si[j] = int'($urandom_range(256)) + 128; bn_scale[j] = fx_t'(Si[j]);
      Hi[j] = int'($urandom_range(64)) - 32; bn_shift[j] = fx_t'(Hi[j]);
    end
  endtask

  task automatic run_layer(bit exp_sel);
    int cyc = 0, bound, maxu = 0;
    for (int u = 0; u < N; u++) begin
      vec_t agg; bit any = 0;
      for (int d = 0; d < D; d++) agg[d] = 0;
      foreach (EU[e]) if (EU[e] == u) begin
        vec_t m = ref_msg(X[u], X[EV[e]], Wi, Bi);
        for (int d = 0; d < D; d++) if (!any || m[d] > agg[d]) agg[d] = m[d];
        any = 1;
      end
      NX[u] = ref_node(X[u], agg, Si, Hi);
    end
    @(negedge clk); start_layer = 1; @(negedge clk); start_layer = 0;
    while (!layer_done) begin @(negedge clk); cyc++; end
    for (int u = 0; u < P_EDGE; u++) if (per_unit[u] > maxu) maxu = per_unit[u];
    // the busiest unit sets the pace; the lock-step broadcast can add a
    // few cycles per target, far less than running the units one after
    // another ((1 + D) * all edges)
    bound = 2 * N + (1 + D) * maxu + 2 * N + 32;
    check(cyc <= bound, $sformatf("layer took %0d cycles, bound %0d", cyc, bound));
    check(cyc >= N + (1 + D) * maxu, $sformatf("layer took %0d cycles, below %0d", cyc, N + (1 + D) * maxu));
    @(negedge clk);
    check(in_sel == exp_sel, "buffers swapped");
    for (int n = 0; n < N; n++) begin
      for (int k = 0; k < P_EDGE; k++) fin_raddr[k] = ROW_W'(n / P_EDGE);
      #1;
      for (int d = 0; d < D; d++)
        check(int'($signed(fin_rdata[n % P_EDGE][d])) == NX[n][d], $sformatf("node %0d dim %0d", n, d));
    end
    for (int n = 0; n < N; n++) X[n] = NX[n];
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    num_nodes = CNT_W'(N);
    @(negedge clk); bufsel_reset = 1; @(negedge clk); bufsel_reset = 0;
    for (int n = 0; n < N; n++) begin
      for (int d = 0; d < D; d++) begin X[n][d] = int'($urandom_range(1024)) - 512; ld_wdata[d] = fx_t'(X[n][d]); end
      ld_we = '0; ld_we[n % P_EDGE] = 1; ld_waddr = ROW_W'(n / P_EDGE);
      @(negedge clk);
    end
    ld_we = '0;
    for (int u = 0; u < P_EDGE; u++) per_unit[u] = 0;
    for (int k = 0; k < 150; k++) begin
      EU.push_back(int'($urandom_range(N - 1)));
      EV.push_back(int'($urandom_range(N - 8)));   // the last targets are never needed
    end
    @(negedge clk); tbl_clear = 1; @(negedge clk); tbl_clear = 0;
    foreach (EU[e]) begin
      tbl_valid = '0; tbl_valid[EU[e] % P_EDGE] = 1;
      tbl_urow = ROW_W'(EU[e] / P_EDGE); tbl_v = node_t'(EV[e]);
      per_unit[EU[e] % P_EDGE]++;
      @(negedge clk);
    end
    tbl_valid = '0; tbl_build = 1; @(negedge clk); tbl_build = 0;
    repeat (N + 160) @(negedge clk);
    set_weights();
    run_layer(1);
    set_weights();
    run_layer(0);
    check(cnt_bcast_stall > 0, "broadcast stalled");
    check(cnt_dropped > 0, "targets dropped");
    check(int'(cnt_edges) == 2 * EU.size(), "all edges processed twice");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
