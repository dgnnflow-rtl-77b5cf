// tb_stream_fifo - random push/pop test of stream_fifo against a queue model.
// Checks data order, that in_ready drops exactly when DEPTH beats are held
// and out_valid exactly when none is held, and that a full FIFO is reached.
module tb_stream_fifo;
  localparam int W = 8, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  stream_fifo #(.WIDTH(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] q[$];
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      in_valid  <= ($urandom_range(2) != 0);
      in_data   <= W'($urandom);
      out_ready <= (c < 1000) ? ($urandom_range(3) == 0) : ($urandom_range(2) != 0);
      @(negedge clk);
      check(in_ready == (q.size() < DEPTH), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (out_valid && out_ready) check(out_data == q[0], $sformatf("data %0h vs %0h", out_data, q[0]));
      if (q.size() == DEPTH) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(fulls > 0, "FIFO became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
