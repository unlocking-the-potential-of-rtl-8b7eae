// tb_context_integrator: C = ReLU6(sat(sat(Cp+Cd)+Cu)) against the integer
// reference on corner and random contexts.
module tb_context_integrator;
  import mcc_pkg::*;
  import mcc_ref_pkg::*;
  q_t cp, cd, cu, c;
  int checks = 0, failures = 0;

  context_integrator dut (.cp(cp), .cd(cd), .cu(cu), .c(c));

  task automatic check(int p, int d, int u);
    cp = 16'(p); cd = 16'(d); cu = 16'(u);
    #1;
    checks++;
    if (s16(c) != ctx(p, d, u)) begin
      failures++;
      if (failures < 10) $display("FAIL %0d %0d %0d: %0d expected %0d", p, d, u, s16(c), ctx(p, d, u));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(4096, 4096, 4096);       // 3.0
    check(32767, 32767, -32768);   // saturates first, then -8: -0.0002 -> 0
    check(-4096, 0, 0);
    check(20000, 10000, 0);        // clipped at 6
    for (int i = 0; i < 3000; i++)
      check(int'($signed(16'($urandom))), int'($signed(16'($urandom))), int'($signed(16'($urandom))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
