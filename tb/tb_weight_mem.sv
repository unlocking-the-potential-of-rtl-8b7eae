// tb_weight_mem: fills the whole memory with a pseudo-random pattern, reads
// every word back (data one clock after the address) and checks that the
// read data holds while the read enable is low.
module tb_weight_mem;
  localparam int DEPTH = 1024;
  logic clk = 0, we = 0, re = 0;
  logic [9:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_mem #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) model[i] = 16'(i * 40503 + 17);
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 10'(i); wdata = model[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); re = 1; raddr = 10'(DEPTH - 1 - i);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[DEPTH-1-i]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d: %h exp %h", DEPTH-1-i, rdata, model[DEPTH-1-i]);
      end
    end
    // hold while re is low
    @(negedge clk); re = 1; raddr = 10'd5;
    @(negedge clk); re = 0; raddr = 10'd6;
    @(posedge clk); #1;
    checks++;
    if (rdata !== model[5]) begin failures++; $display("FAIL: read data did not hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
