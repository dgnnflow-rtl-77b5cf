// tb_weight_store - writes every word with a random value and checks that
// each layer's W, b, BN scale and BN shift appear at the documented offsets.
module tb_weight_store;
  import dgnnflow_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [WADDR_W-1:0] waddr = '0;
  fx_t wdata = '0;
  logic [$clog2(NUM_LAYERS)-1:0] layer = '0;
  wmat_t w;
  emb_t b, bn_scale, bn_shift;
  weight_store dut (.*);
  int model [NUM_LAYERS * LAYER_WORDS];
  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < NUM_LAYERS * LAYER_WORDS; a++) begin
      @(negedge clk); we = 1; waddr = WADDR_W'(a); model[a] = int'($urandom_range(65535)) - 32768; wdata = fx_t'(model[a]);
    end
    @(negedge clk); we = 0;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      int base;
      base = l * LAYER_WORDS;
      layer = l[$clog2(NUM_LAYERS)-1:0]; #1;
      for (int r = 0; r < EMB_DIM; r++) for (int c = 0; c < 2*EMB_DIM; c++)
        check(int'(w[r][c]) == model[base + r*2*EMB_DIM + c], "W");
      for (int d = 0; d < EMB_DIM; d++) begin
        check(int'(b[d]) == model[base + 2*EMB_DIM*EMB_DIM + d], "b");
        check(int'(bn_scale[d]) == model[base + 2*EMB_DIM*EMB_DIM + EMB_DIM + d], "scale");
        check(int'(bn_shift[d]) == model[base + 2*EMB_DIM*EMB_DIM + 2*EMB_DIM + d], "shift");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
