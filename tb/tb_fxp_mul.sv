// tb_fxp_mul: checks the Q3.12 multiplier against exact products divided by
// 4096 (rounded toward minus infinity) and clamped, including the overflow
// flag, on corner values and random operands.
module tb_fxp_mul;
  import mcc_ref_pkg::*;
  logic signed [15:0] a, b, y;
  logic ovf;
  int checks = 0, failures = 0;

  fxp_mul dut (.a(a), .b(b), .y(y), .ovf(ovf));

  task automatic check(int ai, int bi);
    a = 16'(ai); b = 16'(bi);
    #1;
    checks++;
    if (s16(y) != mul(ai, bi) || ovf != mul_ovf(ai, bi)) begin
      failures++;
      if (failures < 10)
        $display("FAIL %0d * %0d: got %0d/%0b exp %0d/%0b", ai, bi, s16(y), ovf, mul(ai, bi), mul_ovf(ai, bi));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(4096, 4096);        // 1*1 = 1
    check(8192, 6144);        // 2*1.5 = 3
    check(-4096, 6144);       // -1.5
    check(-1, 1);             // tiny negative -> -1 lsb (floor)
    check(12288, 12288);      // 3*3 = 9 overflows
    check(-12288, 12288);     // -9 overflows
    check(-32768, -32768);    // 64 overflows
    check(-32768, 4096);      // -8 exact
    for (int i = 0; i < 2000; i++)
      check(int'($signed(16'($urandom))), int'($signed(16'($urandom))));
    for (int i = 0; i < 1000; i++)
      check(int'($signed(16'($urandom_range(0, 16383)))) - 8192, int'($signed(16'($urandom_range(0, 16383)))) - 8192);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
