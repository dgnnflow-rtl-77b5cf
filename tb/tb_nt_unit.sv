// tb_nt_unit - random messages, residual embeddings and BatchNorm
// parameters; checks the written embedding against the reference node
// update, that it goes to the message's node in the same cycle, and the
// node counter.
module tb_nt_unit;
  import dgnnflow_pkg::*;
  import dgnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic msg_valid = 0, msg_ready, wr_en;
  msg_beat_t msg_data = '0;
  emb_t bn_scale = '0, bn_shift = '0, rd_data = '0, wr_data;
  node_t rd_node, wr_node;
  logic [31:0] cnt_nodes;
  nt_unit dut (.*);
  int checks = 0, failures = 0, sent = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    vec_t x, m, sc, sh, y;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      int big;
      big = (it % 5 == 0) ? 30000 : 1000;
      @(negedge clk);
      for (int d = 0; d < D; d++) begin
        x[d] = int'($urandom_range(2*big)) - big; m[d] = int'($urandom_range(2*big)) - big;
        sc[d] = int'($urandom_range(1024)) - 256; sh[d] = int'($urandom_range(512)) - 256;
        rd_data[d] = fx_t'(x[d]); msg_data.m[d] = fx_t'(m[d]);
        bn_scale[d] = fx_t'(sc[d]); bn_shift[d] = fx_t'(sh[d]);
      end
      msg_data.id = node_t'($urandom);
      msg_valid = $urandom_range(1);
      #1;
      y = ref_node(x, m, sc, sh);
      check(msg_ready, "always ready");
      check(wr_en == msg_valid && rd_node == msg_data.id && wr_node == msg_data.id, "write control");
      for (int d = 0; d < D; d++) check(int'(wr_data[d]) == y[d], $sformatf("dim %0d: %0d vs %0d", d, wr_data[d], y[d]));
      if (msg_valid) sent++;
    end
    @(negedge clk); msg_valid = 0; @(negedge clk);
    check(int'(cnt_nodes) == sent, "node counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
