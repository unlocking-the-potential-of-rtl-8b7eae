// tb_weight_load_mux: sends bursts to several targets, with gaps in the
// stream, and checks for each accepted word the one-hot write enable, the
// address (counting from 0 in each burst) and the data one clock later.
module tb_weight_load_mux;
  import mcc_pkg::*;
  localparam int N_TGT = 133;
  logic clk = 0, rst_n = 0, s_valid = 0, s_last = 0, s_ready;
  logic [7:0] sel = '0;
  q_t s_data = '0, wr_data;
  logic [N_TGT-1:0] wr_en;
  logic [9:0] wr_addr;
  int checks = 0, failures = 0;
  int exp_tgt = -1, exp_addr = 0;
  q_t exp_data;

  weight_load_mux #(.N_TGT(N_TGT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: every clock, the outputs must reflect the previous clock's input
  always @(posedge clk) if (rst_n) begin
    #1;
    checks++;
    if (exp_tgt < 0) begin
      if (wr_en != '0) begin failures++; $display("FAIL spurious write"); end
    end else if (exp_tgt >= N_TGT) begin
      if (wr_en != '0) begin failures++; $display("FAIL write to invalid target"); end
    end else if (wr_en != (N_TGT'(1) << exp_tgt) || int'(wr_addr) != exp_addr || wr_data != exp_data) begin
      failures++;
      if (failures < 10) $display("FAIL tgt %0d addr %0d: en=%h addr=%0d data=%h exp %h", exp_tgt, exp_addr, wr_en, wr_addr, wr_data, exp_data);
    end
  end

  task automatic burst(int tgt, int len);
    int a = 0;
    @(negedge clk); sel = 8'(tgt);
    for (int i = 0; i < len; i++) begin
      if ($urandom_range(3) == 0) begin
        @(negedge clk); s_valid = 0; s_last = 0;
        @(posedge clk) exp_tgt = -1;
      end
      @(negedge clk);
      s_valid = 1; s_data = 16'($urandom); s_last = (i == len - 1);
      @(posedge clk) begin exp_tgt = tgt; exp_addr = a; exp_data = s_data; end
      a++;
    end
    @(negedge clk); s_valid = 0; s_last = 0;
    @(posedge clk) exp_tgt = -1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (!s_ready) begin failures++; $display("FAIL not ready"); end
    burst(0, 22);
    burst(1, 50);
    burst(132, 7);
    burst(132, 7);   // same target again: restarts at 0 after s_last
    burst(57, 25);
    burst(140, 3);   // out of range target
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
