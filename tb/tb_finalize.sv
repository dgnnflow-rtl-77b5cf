// tb_finalize - the result buffer is an array model; checks that finalize
// streams {n, x_n} for n = 0..N-1 in order under random back-pressure and
// pulses done once.
module tb_finalize;
  import dgnnflow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, y_valid, y_ready = 0;
  logic [CNT_W-1:0] num_nodes = '0;
  logic [P_EDGE-1:0][ROW_W-1:0] raddr;
  emb_t [P_EDGE-1:0] rdata;
  msg_beat_t y_data;
  finalize dut (.*);
  emb_t mem [P_EDGE][ROWS];
  always_comb for (int b = 0; b < P_EDGE; b++) rdata[b] = mem[b][raddr[b]];
  int checks = 0, failures = 0, got = 0, dones = 0;
  localparam int N = 66;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask
  always @(posedge clk) if (rst_n) begin
    if (done) dones++;
    if (y_valid && y_ready) begin
      check(int'(y_data.id) == got, "order");
      check(y_data.m == mem[got % P_EDGE][got / P_EDGE], "payload");
      got++;
    end
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int b = 0; b < P_EDGE; b++) for (int r = 0; r < ROWS; r++)
      for (int d = 0; d < EMB_DIM; d++) mem[b][r][d] = fx_t'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; num_nodes = CNT_W'(N); @(negedge clk); start = 0;
    while (busy) begin y_ready = ($urandom_range(2) != 0); @(negedge clk); end
    repeat (2) @(negedge clk);
    check(got == N && dones == 1, "all nodes, one done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
