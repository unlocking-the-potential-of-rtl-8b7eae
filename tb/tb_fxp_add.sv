// tb_fxp_add: checks the saturating adder/subtractor against exact integer
// sums clamped to the Q3.12 range, on corner values and random operands.
module tb_fxp_add;
  import mcc_ref_pkg::*;
  logic signed [15:0] a, b, y;
  logic sub, ovf;
  int checks = 0, failures = 0;

  fxp_add dut (.a(a), .b(b), .sub(sub), .y(y), .ovf(ovf));

  task automatic check(int ai, int bi, bit s);
    int exp_y; bit exp_o; longint ex;
    a = 16'(ai); b = 16'(bi); sub = s;
    #1;
    ex = s ? longint'(ai) - longint'(bi) : longint'(ai) + longint'(bi);
    exp_y = clamp(ex);
    exp_o = (ex > QMAX) || (ex < QMIN);
    checks++;
    if (s16(y) != exp_y || ovf != exp_o) begin
      failures++;
      if (failures < 10)
        $display("FAIL %0d %s %0d: got %0d/%0b exp %0d/%0b", ai, s ? "-" : "+", bi, s16(y), ovf, exp_y, exp_o);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(4096, 4096, 0);          // 1+1
    check(32767, 1, 0);            // positive overflow -> 0x7FFF
    check(-32768, -1, 0);          // negative overflow -> 0x8000
    check(20000, 20000, 0);
    check(-20000, -20000, 0);
    check(0, -32768, 1);           // 0-(-8) saturates
    check(-32768, 1, 1);
    check(100, 200, 1);
    for (int i = 0; i < 2000; i++)
      check(int'($signed(16'($urandom))), int'($signed(16'($urandom))), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
