// tb_activation_block: checks ReLU6 (negative to 0, above 6.0 to 6.0) and
// the identity option.
module tb_activation_block;
  import mcc_ref_pkg::*;
  import mcc_pkg::*;
  q_t x, y, yn;
  int checks = 0, failures = 0;

  activation_block #(.ACT(ACT_RELU6)) dut  (.x(x), .y(y));
  activation_block #(.ACT(ACT_NONE))  dutn (.x(x), .y(yn));

  task automatic check(int xi);
    x = 16'(xi);
    #1;
    checks += 2;
    if (s16(y) != relu6(xi)) begin
      failures++;
      $display("FAIL relu6(%0d) = %0d, expected %0d", xi, s16(y), relu6(xi));
    end
    if (s16(yn) != xi) begin
      failures++;
      $display("FAIL identity(%0d) = %0d", xi, s16(yn));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0); check(-1); check(-32768); check(24576); check(24577);
    check(32767); check(4096); check(1);
    for (int i = 0; i < 500; i++) check(int'($signed(16'($urandom))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
