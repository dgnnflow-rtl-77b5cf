// tb_ne_buffer - random writes to all banks, then reads through both read
// ports, compared with an array model of the banks.
module tb_ne_buffer;
  import dgnnflow_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [P_EDGE-1:0] we = '0;
  logic [P_EDGE-1:0][ROW_W-1:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  emb_t [P_EDGE-1:0] wdata = '0, rdata_a, rdata_b;
  ne_buffer dut (.*);
  emb_t model [P_EDGE][ROWS];
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
    // fill everything
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      for (int b = 0; b < P_EDGE; b++) begin
        we[b] = 1; waddr[b] = ROW_W'(r); wdata[b] = rv(); model[b][r] = wdata[b];
      end
    end
    // random partial writes with concurrent reads
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      for (int b = 0; b < P_EDGE; b++) begin
        we[b] = $urandom_range(1); waddr[b] = ROW_W'($urandom_range(ROWS-1)); wdata[b] = rv();
        raddr_a[b] = ROW_W'($urandom_range(ROWS-1)); raddr_b[b] = ROW_W'($urandom_range(ROWS-1));
      end
      #1;
      for (int b = 0; b < P_EDGE; b++) begin
        check(rdata_a[b] == model[b][raddr_a[b]], "port A");
        check(rdata_b[b] == model[b][raddr_b[b]], "port B");
      end
      @(posedge clk);
      for (int b = 0; b < P_EDGE; b++) if (we[b]) model[b][waddr[b]] = wdata[b];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
