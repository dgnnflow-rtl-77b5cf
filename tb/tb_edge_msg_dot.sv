// tb_edge_msg_dot - random embeddings, weight rows and biases (including
// large values that saturate the difference and the result), compared with
// the reference message function of dgnn_ref_pkg.
module tb_edge_msg_dot;
  import dgnnflow_pkg::*;
  import dgnn_ref_pkg::*;
  emb_t xu, xv;
  fx_t [2*EMB_DIM-1:0] wrow;
  fx_t bias, m;
  edge_msg_dot dut (.*);
  int checks = 0, failures = 0, sats = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask
  initial begin
    vec_t a, c, bb, r;
    int w [D][2*D];
    for (int it = 0; it < 3000; it++) begin
      int big;
      big = (it % 4 == 0) ? 32767 : 700;
      for (int d = 0; d < D; d++) begin
        a[d] = int'($urandom_range(2*big)) - big; c[d] = int'($urandom_range(2*big)) - big;
        xu[d] = fx_t'(a[d]); xv[d] = fx_t'(c[d]); bb[d] = 0;
      end
      for (int i = 0; i < 2*D; i++) begin
        w[0][i] = int'($urandom_range(200)) - 100; wrow[i] = fx_t'(w[0][i]);
      end
      bb[0] = int'($urandom_range(1000)) - 500; bias = fx_t'(bb[0]);
      #1;
      r = ref_msg(a, c, w, bb);
      check(int'(m) == r[0], $sformatf("m %0d ref %0d", m, r[0]));
      if (r[0] == 32767 || r[0] == -32768) sats++;
    end
    check(sats > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
