// tb_mp_nt_adapter - four message streams (node n offered by source n % 4,
// with random gaps) and two NT-side sinks with random back-pressure. Checks
// that node n reaches sink n % P_NODE with its payload, in node order, that
// no beat is lost or duplicated, and that done pulses once after the last.
module tb_mp_nt_adapter;
  import dgnnflow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  logic [CNT_W-1:0] num_nodes = '0;
  logic [P_EDGE-1:0] in_valid = '0, in_ready;
  msg_beat_t [P_EDGE-1:0] in_data = '0;
  logic [P_NODE-1:0] out_valid, out_ready = '0;
  msg_beat_t out_data;
  mp_nt_adapter dut (.*);

  int checks = 0, failures = 0, dones = 0, next_out = 0;
  int next_in [P_EDGE];
  localparam int N = 57;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask
  function automatic emb_t payload(int n);
    emb_t e; for (int d = 0; d < EMB_DIM; d++) e[d] = fx_t'(n * 37 + d); return e;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (done) dones++;
    for (int j = 0; j < P_NODE; j++) if (out_valid[j] && out_ready[j]) begin
      check(int'(out_data.id) == next_out, "node order");
      check(j == next_out % P_NODE, "NT routing");
      check(out_data.m == payload(next_out), "payload");
      next_out++;
    end
    for (int s = 0; s < P_EDGE; s++) if (in_valid[s] && in_ready[s]) next_in[s] += P_EDGE;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int s = 0; s < P_EDGE; s++) next_in[s] = s;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; num_nodes = CNT_W'(N); @(negedge clk); start = 0;
    while (next_out < N) begin
      for (int s = 0; s < P_EDGE; s++) begin
        in_valid[s] = (next_in[s] < N) && ($urandom_range(2) != 0);
        in_data[s].id = node_t'(next_in[s]);
        in_data[s].m = payload(next_in[s]);
      end
      for (int j = 0; j < P_NODE; j++) out_ready[j] = ($urandom_range(2) != 0);
      @(negedge clk);
    end
    in_valid = '0;
    repeat (3) @(negedge clk);
    check(next_out == N && dones == 1, "all nodes, one done");
    for (int s = 0; s < P_EDGE; s++) check(next_in[s] >= N, "all sources drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
