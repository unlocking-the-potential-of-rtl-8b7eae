// tb_input_buffer: loads all registers, checks them, checks that writes to
// addresses beyond N are ignored and that reset clears the buffer.
module tb_input_buffer;
  import mcc_pkg::*;
  localparam int N = 22;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [9:0] wr_addr = '0;
  q_t wr_data = '0;
  q_t x [N];
  q_t model [N];
  int checks = 0, failures = 0;

  input_buffer #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    checks++;
    for (int i = 0; i < N; i++) if (x[i] != 0) begin failures++; $display("FAIL reset x[%0d]", i); break; end
    #1 rst_n = 1;
    for (int i = 0; i < N; i++) begin
      model[i] = 16'($urandom);
      @(negedge clk); wr_en = 1; wr_addr = 10'(i); wr_data = model[i];
    end
    @(negedge clk); wr_addr = 10'(N); wr_data = 16'h1234;   // out of range
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (x[i] != model[i]) begin failures++; $display("FAIL x[%0d]=%h exp %h", i, x[i], model[i]); end
    end
    @(negedge clk); wr_en = 1; wr_addr = 10'd3; wr_data = 16'h0abc;
    @(negedge clk); wr_en = 0;
    checks++;
    if (x[3] != 16'h0abc || x[2] != model[2]) begin failures++; $display("FAIL single write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
