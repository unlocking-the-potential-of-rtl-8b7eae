// tb_layer_sequencer: answers each layer_start with layer_done after a
// random delay and checks the order of the pulses (start l, then mod_en l
// only after done l, layers 0..3 in turn), the single done pulse, busy, the
// clock count of one inference and that start is ignored while busy.
module tb_layer_sequencer;
  localparam int NL = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [NL-1:0] layer_done = '0, layer_start, mod_en;
  int checks = 0, failures = 0;
  int delay [NL];
  int exp_layer = 0, n_done = 0, cyc = 0, t_start = 0, t_done = 0;
  bit waiting = 0;

  layer_sequencer #(.N_LAYERS(NL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // environment model: a layer's MACs finish delay[l] clocks after its start
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (layer_start != '0) begin
        checks++;
        if (layer_start != NL'(1) << exp_layer || mod_en != '0) begin
          failures++; $display("FAIL start pulse %b, expected layer %0d", layer_start, exp_layer);
        end
        layer_done <= '0;
        waiting = 1;
        fork begin
          automatic int l = exp_layer;
          repeat (delay[l]) @(posedge clk);
          layer_done[l] <= 1'b1;
        end join_none
      end
      if (mod_en != '0) begin
        checks++;
        if (mod_en != NL'(1) << exp_layer || !layer_done[exp_layer]) begin
          failures++; $display("FAIL mod_en %b before/without done of layer %0d", mod_en, exp_layer);
        end
        exp_layer++;
      end
      if (done) begin n_done++; t_done = cyc; end
    end
  end

  task automatic infer();
    int exp_cycles = 1;
    exp_layer = 0;
    for (int l = 0; l < NL; l++) begin
      delay[l] = $urandom_range(1, 20);
      exp_cycles += delay[l] + 3;
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; t_start = cyc;
    checks++;
    if (!busy) begin failures++; $display("FAIL not busy"); end
    @(negedge clk); start = 1;      // must be ignored
    @(negedge clk); start = 0;
    wait (n_done > 0);
    @(negedge clk);
    checks += 3;
    if (exp_layer != NL) begin failures++; $display("FAIL %0d layers modulated", exp_layer); end
    if (busy) begin failures++; $display("FAIL still busy"); end
    if (t_done - t_start != exp_cycles) begin
      failures++; $display("FAIL inference took %0d clocks, expected %0d", t_done - t_start, exp_cycles);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (n_done != 1) begin failures++; $display("FAIL %0d done pulses", n_done); end
    n_done = 0;
    layer_done = '0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 10; i++) infer();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
