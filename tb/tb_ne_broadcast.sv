// tb_ne_broadcast - runs two broadcasts of N node embeddings with randomly
// stalling per-unit FIFOs. The Input NE buffer and the Intermediate NE buffer
// are array models. Checks: the copy phase takes exactly N cycles, every
// unit receives (n, x_n) for n = 0..N-1 in order and then the end token, all
// units receive each beat in the same cycle, nothing is sent while a unit is
// not ready, and done pulses once per run.
module tb_ne_broadcast;
  import dgnnflow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, copy_active, im_we;
  logic [CNT_W-1:0] num_nodes = '0;
  logic [P_EDGE-1:0][ROW_W-1:0] in_raddr;
  emb_t [P_EDGE-1:0] in_rdata;
  node_t im_waddr, im_raddr;
  emb_t im_wdata, im_rdata;
  logic [P_EDGE-1:0] bc_valid, bc_ready = '0;
  bcast_beat_t bc_data;
  ne_broadcast dut (.*);

  emb_t inbuf [P_EDGE][ROWS];
  emb_t im [MAX_NODES];
  always_comb for (int b = 0; b < P_EDGE; b++) in_rdata[b] = inbuf[b][in_raddr[b]];
  assign im_rdata = im[im_raddr];
  always_ff @(posedge clk) if (im_we) im[im_waddr] <= im_wdata;

  int checks = 0, failures = 0, stalls = 0, copy_cycles = 0, dones = 0;
  int expect_n [P_EDGE];
  bit got_last [P_EDGE];
  int N;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (copy_active) copy_cycles++;
    if (done) dones++;
    if (bc_valid != '0) begin
      check(bc_valid == {P_EDGE{1'b1}}, "all units get the beat together");
      check(bc_ready == {P_EDGE{1'b1}}, "only sent when all ready");
      for (int b = 0; b < P_EDGE; b++) begin
        if (bc_data.last) begin
          check(expect_n[b] == N, "end token after all nodes");
          got_last[b] = 1;
        end else begin
          check(int'(bc_data.id) == expect_n[b], $sformatf("unit %0d order", b));
          check(bc_data.x == inbuf[int'(bc_data.id) % P_EDGE][int'(bc_data.id) / P_EDGE], "payload");
          expect_n[b]++;
        end
      end
    end else if (busy && !copy_active) stalls++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int runs [2] = '{37, 128};
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (runs[r]) begin
      N = runs[r];
      for (int b = 0; b < P_EDGE; b++) for (int i = 0; i < ROWS; i++)
        for (int d = 0; d < EMB_DIM; d++) inbuf[b][i][d] = fx_t'($urandom);
      for (int b = 0; b < P_EDGE; b++) begin expect_n[b] = 0; got_last[b] = 0; end
      copy_cycles = 0; dones = 0;
      @(negedge clk); start = 1; num_nodes = CNT_W'(N);
      @(negedge clk); start = 0;
      while (busy) begin
        for (int b = 0; b < P_EDGE; b++) bc_ready[b] = ($urandom_range(3) != 0);
        @(negedge clk);
      end
      @(negedge clk);
      check(copy_cycles == N, $sformatf("copy took %0d cycles for %0d nodes", copy_cycles, N));
      check(dones == 1, "one done pulse");
      for (int b = 0; b < P_EDGE; b++) check(got_last[b], "end token received");
    end
    check(stalls > 0, "broadcast stalled at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
