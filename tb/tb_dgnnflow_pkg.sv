// tb_dgnnflow_pkg - checks the package's fixed-point helpers: sat() clamps
// to the 16-bit range and fmul() is the Q7.8 product rounded toward minus
// infinity, against integer arithmetic on random and edge-case operands.
module tb_dgnnflow_pkg;
  import dgnnflow_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask
  initial begin
    longint v, e;
    int a, b;
    check(sat(48'sd40000) == 16'sd32767, "sat high");
    check(sat(-48'sd40000) == -16'sd32768, "sat low");
    check(sat(48'sd123) == 16'sd123, "sat pass");
    check(sat(-48'sd32768) == -16'sd32768, "sat min edge");
    for (int i = 0; i < 2000; i++) begin
      a = int'($urandom_range(65535)) - 32768;
      b = int'($urandom_range(65535)) - 32768;
      e = (longint'(a) * longint'(b));
      e = (e >= 0) ? e / 256 : -((-e + 255) / 256);
      v = longint'(fmul(fx_t'(a), fx_t'(b)));
      check(v == e, $sformatf("fmul %0d*%0d = %0d, expected %0d", a, b, v, e));
      e = longint'(a) * 3;
      check(int'(sat(48'(e))) == ((e > 32767) ? 32767 : (e < -32768) ? -32768 : int'(e)), "sat random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
