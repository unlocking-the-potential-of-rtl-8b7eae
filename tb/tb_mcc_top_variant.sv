// tb_mcc_top_variant: end-to-end test of the full-size network (audio
// 22:24:12:6:22, video 50:24:12:6:22, three working memories) built with
// both non-default options of mcc_top:
//   W = 11, F = 7  : 11-bit Q3.7 words (1 sign, 3 integer and 7 fraction
//                    bits), the reduced precision the deep-model hardware
//                    estimate is based on; every adder, multiplier, ReLU6
//                    and memory word follows these parameters;
//   CD_ALL = 1     : each unit's distal context is the sum of all receptive
//                    fields of the other stream in its layer.
// Same procedure and checks as tb_mcc_top (see mcc_top_check.svh): load all
// memories and inputs, run several inferences, and compare every output,
// the product count, the firing count, the saturation count and the latency
// against an integer reference model set to the same format and mode.
module tb_mcc_top_variant;
  import mcc_pkg::*;
  import mcc_ref_pkg::*;

  localparam int TB_W = 11, TB_F = 7;
  localparam bit TB_CD_ALL = 1'b1;

`include "mcc_top_check.svh"

  mcc_top #(.W(TB_W), .F(TB_F), .CD_ALL(TB_CD_ALL)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
