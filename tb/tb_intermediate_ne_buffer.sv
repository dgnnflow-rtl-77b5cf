// tb_intermediate_ne_buffer - writes every row, then random write/read
// traffic compared with an array model.
module tb_intermediate_ne_buffer;
  import dgnnflow_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  node_t waddr = '0, raddr = '0;
  emb_t wdata = '0, rdata;
  intermediate_ne_buffer dut (.*);
  emb_t model [MAX_NODES];
  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask
  function automatic emb_t rv();
    emb_t e; for (int d = 0; d < EMB_DIM; d++) e[d] = fx_t'($urandom); return e;
  endfunction
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < MAX_NODES; r++) begin
      @(negedge clk); we = 1; waddr = node_t'(r); wdata = rv(); model[r] = wdata;
    end
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      we = $urandom_range(1); waddr = node_t'($urandom); wdata = rv(); raddr = node_t'($urandom);
      #1 check(rdata == model[raddr], "read");
      @(posedge clk); if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
