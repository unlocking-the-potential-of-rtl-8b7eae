// tb_working_memory: the cross-modal working memory with 3 audio and 4
// video inputs. Checks m = w0*m_prev + sum wa*a + sum wv*v + bias (all
// saturating, in that order), the products counted (silent inputs skipped)
// and the latency N_A+N_V+5 clocks.
module tb_working_memory;
  import mcc_pkg::*;
  import mcc_ref_pkg::*;
  localparam int N_A = 3, N_V = 4, N = 1 + N_A + N_V;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, valid, ovf;
  logic [9:0] wr_addr = '0;
  logic [10:0] mac_used;
  q_t wr_data = '0, m_prev = '0, m;
  q_t a [N_A];
  q_t v [N_V];
  int w [N + 1];
  int checks = 0, failures = 0;

  working_memory #(.N_A(N_A), .N_V(N_V)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_in();
    return ($urandom_range(2) == 0) ? 0 : int'($urandom_range(8192)) - 4096;
  endfunction

  task automatic run();
    int in [N];
    int em = 0, used = 0, lat = 0;
    for (int j = 0; j <= N; j++) begin
      w[j] = $urandom_range(8192) - 4096;
      @(negedge clk); wr_en = 1; wr_addr = 10'(j); wr_data = 16'(w[j]);
    end
    @(negedge clk); wr_en = 0;
    in[0] = rnd_in(); m_prev = 16'(in[0]);
    for (int i = 0; i < N_A; i++) begin in[1+i] = rnd_in(); a[i] = 16'(in[1+i]); end
    for (int i = 0; i < N_V; i++) begin in[1+N_A+i] = rnd_in(); v[i] = 16'(in[1+N_A+i]); end
    for (int j = 0; j < N; j++)
      if (in[j] != 0) begin em = add(em, mul(w[j], in[j])); used++; end
    em = add(em, w[N]);
    start = 1;
    @(posedge clk); #1 start = 0;
    while (!valid && lat < 100) begin @(posedge clk); #1 lat++; end
    checks += 3;
    if (lat != N + 4) begin failures++; $display("FAIL latency %0d expected %0d", lat, N + 4); end
    if (s16(m) != em) begin failures++; $display("FAIL m %0d expected %0d", s16(m), em); end
    if (int'(mac_used) != used) begin failures++; $display("FAIL used %0d expected %0d", mac_used, used); end
  endtask

  initial begin
    for (int i = 0; i < N_A; i++) a[i] = Q_ZERO;
    for (int i = 0; i < N_V; i++) v[i] = Q_ZERO;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 30; i++) run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
