// tb_modulatory_block: compares Y = ReLU6(2R^2 + R + R + 2C(1+|R|)) with the
// integer reference on chosen points (non-firing, firing, clipping at 6,
// saturation) and random (R, C).
module tb_modulatory_block;
  import mcc_pkg::*;
  import mcc_ref_pkg::*;
  q_t r, c, y;
  int checks = 0, failures = 0;
  int n_zero = 0, n_clip = 0;

  modulatory_block dut (.r(r), .c(c), .y(y));

  task automatic check(int ri, int ci);
    r = 16'(ri); c = 16'(ci);
    #1;
    checks++;
    if (s16(y) == 0) n_zero++;
    if (s16(y) == SIX) n_clip++;
    if (s16(y) != modf(ri, ci)) begin
      failures++;
      if (failures < 10) $display("FAIL R=%0d C=%0d: %0d expected %0d", ri, ci, s16(y), modf(ri, ci));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0);
    check(-2048, 0);        // R=-0.5, C=0: 0.5-1 < 0, does not fire
    check(2048, 0);         // R=0.5: 0.5+1 = 1.5
    check(-2048, 4096);     // context rescues it: -0.5 + 2*1*1.5 = 2.5
    check(4096, 4096);      // 2+2+4 = 8 -> clipped at 6
    check(-32768, 0);
    check(32767, 32767);
    for (int i = 0; i < 3000; i++)
      check(int'($signed(16'($urandom))) / 4, int'($urandom_range(24576)));
    checks++;
    if (n_zero == 0 || n_clip == 0) begin failures++; $display("FAIL: no zero or no clipped output seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
