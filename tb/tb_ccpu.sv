// tb_ccpu: one processing unit through 30 inferences. Each loads new
// weights and inputs, checks R and its latency (N_IN+4 clocks), then applies
// distal and universal contexts and checks the registered output against
// Y = Mod(R, ReLU6(Cp + Cd + Cu)), Cp being the previous output. Every
// fifth inference is built so that the unit must stay silent.
module tb_ccpu;
  import mcc_pkg::*;
  import mcc_ref_pkg::*;
  localparam int N_IN = 6;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, r_valid, mod_en = 0, ovf;
  logic [9:0] wr_addr = '0;
  logic [10:0] mac_used;
  q_t wr_data = '0, r, cd = '0, cu = '0, y;
  q_t x [N_IN];
  int w [N_IN + 1];
  int checks = 0, failures = 0, yprev = 0, n_fire = 0, n_silent = 0;

  ccpu #(.N_IN(N_IN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic infer(bit quiet);
    int er = 0, used = 0, lat = 0, c, ey, cdi, cui;
    for (int j = 0; j <= N_IN; j++) begin
      w[j] = $urandom_range(8192) - 4096;
      if (quiet && j == N_IN) w[j] = -2048;   // bias -0.5
      @(negedge clk); wr_en = 1; wr_addr = 10'(j); wr_data = 16'(w[j]);
    end
    @(negedge clk); wr_en = 0;
    for (int j = 0; j < N_IN; j++) begin
      x[j] = (quiet || $urandom_range(3) == 0) ? Q_ZERO : 16'($urandom_range(8192) - 4096);
      if (x[j] != 0) begin er = add(er, mul(w[j], s16(x[j]))); used++; end
    end
    er = add(er, w[N_IN]);
    start = 1;
    @(posedge clk); #1 start = 0;
    while (!r_valid && lat < 100) begin @(posedge clk); #1 lat++; end
    checks += 3;
    if (lat != N_IN + 4) begin failures++; $display("FAIL latency %0d", lat); end
    if (s16(r) != er) begin failures++; $display("FAIL R %0d expected %0d", s16(r), er); end
    if (int'(mac_used) != used) begin failures++; $display("FAIL used %0d expected %0d", mac_used, used); end
    cdi = quiet ? -32768 : $urandom_range(16384) - 8192;
    cui = quiet ? 0 : $urandom_range(8192) - 4096;
    @(negedge clk); cd = 16'(cdi); cu = 16'(cui); mod_en = 1;
    @(negedge clk); mod_en = 0;
    c  = ctx(yprev, cdi, cui);
    ey = modf(er, c);
    checks++;
    if (s16(y) != ey) begin failures++; $display("FAIL Y %0d expected %0d (R=%0d C=%0d)", s16(y), ey, er, c); end
    if (ey == 0) n_silent++; else n_fire++;
    yprev = ey;
  endtask

  initial begin
    for (int j = 0; j < N_IN; j++) x[j] = Q_ZERO;
    repeat (2) @(posedge clk);
    checks++;
    if (y != Q_ZERO) begin failures++; $display("FAIL y not reset"); end
    #1 rst_n = 1;
    for (int i = 0; i < 30; i++) infer(i % 5 == 4);
    checks++;
    if (n_fire == 0 || n_silent == 0) begin failures++; $display("FAIL: firing and silence not both seen"); end
    $display("units fired %0d times, stayed silent %0d times", n_fire, n_silent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
