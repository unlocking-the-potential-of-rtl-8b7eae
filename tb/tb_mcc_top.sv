// tb_mcc_top: end-to-end test of the full-size network (audio 22:24:12:6:22,
// video 50:24:12:6:22, three working memories), at its default parameters
// (16-bit Q3.12 words).
//
// It loads every weight memory, the three working memories and both input
// buffers through the word stream, then runs several inferences, reloading
// only the inputs in between, so the proximal context (each unit's previous
// output) carries over. An integer reference model of the whole network
// predicts every output, the number of products computed, the number of
// firing units, the number of saturated sums and the inference latency
// (sum over layers of longest MAC + 7 clocks).
//
// It also counts how often each mechanism of the design occurred in the
// reference run and fails if one never did: skipped zero synapses, silent
// units, outputs clipped at 6, saturated sums, units made to fire by their
// context, non-zero universal context, non-zero proximal context. The test
// body is shared with tb_mcc_top_variant and lives in mcc_top_check.svh.
module tb_mcc_top;
  import mcc_pkg::*;
  import mcc_ref_pkg::*;

  localparam int TB_W = 16, TB_F = 12;
  localparam bit TB_CD_ALL = 1'b0;

`include "mcc_top_check.svh"

  mcc_top dut (.*);

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
