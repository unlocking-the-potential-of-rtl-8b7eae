// tb_mac_unit: MAC FSM and pipeline with a weight memory attached.
// Each run loads N_IN weights and a bias, applies inputs of which some are
// zero, and checks the saturating weighted sum, the number of products
// computed (zeros skipped), the sticky overflow flag and the latency
// (valid exactly N_IN+4 clocks after the clock that samples start).
module tb_mac_unit;
  import mcc_pkg::*;
  import mcc_ref_pkg::*;
  localparam int N_IN = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic [9:0] x_idx, mem_addr, waddr = '0;
  logic mem_re, we = 0, valid, ovf;
  q_t x_val, mem_rdata, acc, wdata = '0;
  logic [10:0] mac_used;
  q_t x [N_IN];
  int w [N_IN + 1];
  int checks = 0, failures = 0;

  assign x_val = (x_idx < 10'(N_IN)) ? x[x_idx] : Q_ZERO;

  weight_mem u_mem (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                    .re(mem_re), .raddr(mem_addr), .rdata(mem_rdata));
  mac_unit #(.N_IN(N_IN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int maxmag, int zero_pct);
    int exp_acc = 0, exp_used = 0, lat = 0;
    bit exp_ovf = 0;
    for (int j = 0; j <= N_IN; j++) begin
      w[j] = $urandom_range(2 * maxmag) - maxmag;
      @(negedge clk); we = 1; waddr = 10'(j); wdata = 16'(w[j]);
    end
    @(negedge clk); we = 0;
    for (int j = 0; j < N_IN; j++)
      x[j] = ($urandom_range(99) < zero_pct) ? Q_ZERO : 16'($urandom_range(2 * maxmag) - maxmag);
    for (int j = 0; j < N_IN; j++) begin
      if (s16(x[j]) != 0) begin
        exp_ovf |= mul_ovf(w[j], s16(x[j])) | add_ovf(exp_acc, mul(w[j], s16(x[j])));
        exp_acc = add(exp_acc, mul(w[j], s16(x[j])));
        exp_used++;
      end
    end
    exp_ovf |= add_ovf(exp_acc, w[N_IN]);
    exp_acc = add(exp_acc, w[N_IN]);
    start = 1;
    @(posedge clk); #1 start = 0;
    while (!valid && lat < 100) begin
      @(posedge clk); #1 lat++;
    end
    checks += 4;
    if (lat != N_IN + 4) begin failures++; $display("FAIL latency %0d, expected %0d", lat, N_IN + 4); end
    if (s16(acc) != exp_acc) begin failures++; $display("FAIL acc %0d, expected %0d", s16(acc), exp_acc); end
    if (int'(mac_used) != exp_used) begin failures++; $display("FAIL used %0d, expected %0d", mac_used, exp_used); end
    if (ovf != exp_ovf) begin failures++; $display("FAIL ovf %0b, expected %0b", ovf, exp_ovf); end
    repeat (3) @(posedge clk);
    checks++;
    if (!valid || s16(acc) != exp_acc) begin failures++; $display("FAIL result did not hold"); end
  endtask

  initial begin
    for (int j = 0; j < N_IN; j++) x[j] = Q_ZERO;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 20; i++) run(4096, 30);     // |w|,|x| <= 1.0
    for (int i = 0; i < 10; i++) run(32767, 10);    // saturating runs
    for (int i = 0; i < 5; i++)  run(4096, 100);    // all inputs zero: bias only
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
