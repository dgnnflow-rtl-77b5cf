// tb_load_node_embeddings - streams N embeddings with gaps and checks that
// beat n is written to bank n % P_EDGE, row n / P_EDGE, exactly once, that
// only N beats are accepted and that done pulses.
module tb_load_node_embeddings;
  import dgnnflow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, x_valid = 0, x_ready;
  logic [CNT_W-1:0] num_nodes = '0;
  emb_t x_data = '0, wdata;
  logic [P_EDGE-1:0] we;
  logic [ROW_W-1:0] waddr;
  load_node_embeddings dut (.*);
  int checks = 0, failures = 0, writes = 0, dones = 0;
  emb_t mem [P_EDGE][ROWS];
  localparam int N = 53;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask
  function automatic emb_t payload(int n);
    emb_t e; for (int d = 0; d < EMB_DIM; d++) e[d] = fx_t'(n * 101 - d); return e;
  endfunction
  always @(posedge clk) if (rst_n) begin
    if (done) dones++;
    if (we != '0) begin
      check($onehot(we), "one bank");
      for (int b = 0; b < P_EDGE; b++) if (we[b]) mem[b][waddr] = wdata;
      writes++;
    end
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; num_nodes = CNT_W'(N); @(negedge clk); start = 0;
    for (int n = 0; n < N; n++) begin
      while ($urandom_range(2) == 0) begin x_valid = 0; @(negedge clk); end
      x_valid = 1; x_data = payload(n);
      @(posedge clk); while (!x_ready) @(posedge clk);
      @(negedge clk);
    end
    // an extra beat must not be taken
    x_valid = 1; x_data = payload(999);
    repeat (4) @(negedge clk);
    x_valid = 0;
    check(writes == N && dones == 1 && !busy, "N writes, one done");
    for (int n = 0; n < N; n++) check(mem[n % P_EDGE][n / P_EDGE] == payload(n), $sformatf("node %0d", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
