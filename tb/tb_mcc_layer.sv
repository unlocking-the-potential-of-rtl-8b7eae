// tb_mcc_layer: a small layer (3 unit pairs, 5 audio and 7 video inputs),
// built twice from the same weights and inputs: dut with the default
// paired distal context and dut_all with CD_ALL = 1 (all-to-all).
// Checks every unit's output of both against the reference, which requires
// each unit to receive the right distal context (its partner's R, or the
// saturating sum of all R of the other stream in unit order) and the
// broadcast universal context; also checks all_valid, mac_used and n_fired,
// and that the two variants give different outputs at least once.
module tb_mcc_layer;
  import mcc_pkg::*;
  import mcc_ref_pkg::*;
  localparam int NA = 5, NV = 7, NO = 3;
  logic clk = 0, rst_n = 0, start = 0, mod_en = 0, all_valid;
  logic [2*NO-1:0] wr_en = '0;
  logic [9:0] wr_addr = '0;
  q_t wr_data = '0, cu = '0;
  q_t x_a [NA];
  q_t x_v [NV];
  q_t y_a [NO];
  q_t y_v [NO];
  logic [31:0] mac_used;
  logic [15:0] n_fired, n_sat;
  q_t y_a2 [NO];
  q_t y_v2 [NO];
  logic all_valid2;
  logic [31:0] mac_used2;
  logic [15:0] n_fired2, n_sat2;
  int ya2_prev [NO];
  int yv2_prev [NO];
  int n_differ = 0;
  int wa [NO][NA + 1];
  int wv [NO][NV + 1];
  int ya_prev [NO];
  int yv_prev [NO];
  int checks = 0, failures = 0, n_silent = 0;

  mcc_layer #(.N_IN_A(NA), .N_IN_V(NV), .N_OUT(NO)) dut (.*);
  mcc_layer #(.N_IN_A(NA), .N_IN_V(NV), .N_OUT(NO), .CD_ALL(1'b1)) dut_all (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en), .wr_addr (wr_addr), .wr_data (wr_data),
    .start (start), .x_a (x_a), .x_v (x_v), .mod_en (mod_en), .cu (cu),
    .y_a (y_a2), .y_v (y_v2), .all_valid (all_valid2), .mac_used (mac_used2),
    .n_fired (n_fired2), .n_sat (n_sat2)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  task automatic run();
    int ra [NO], rv [NO];
    int used = 0, fired = 0, fired2 = 0, cui, ea, ev, sa, sv;
    for (int i = 0; i < NO; i++) begin
      for (int j = 0; j <= NA; j++) begin
        wa[i][j] = $urandom_range(6000) - 3000;
        @(negedge clk); wr_en = '0; wr_en[i] = 1; wr_addr = 10'(j); wr_data = 16'(wa[i][j]);
      end
      for (int j = 0; j <= NV; j++) begin
        wv[i][j] = $urandom_range(6000) - 3000;
        @(negedge clk); wr_en = '0; wr_en[NO+i] = 1; wr_addr = 10'(j); wr_data = 16'(wv[i][j]);
      end
    end
    @(negedge clk); wr_en = '0;
    for (int j = 0; j < NA; j++) x_a[j] = ($urandom_range(3) == 0) ? Q_ZERO : 16'($urandom_range(8192) - 4096);
    for (int j = 0; j < NV; j++) x_v[j] = ($urandom_range(3) == 0) ? Q_ZERO : 16'($urandom_range(8192) - 4096);
    for (int i = 0; i < NO; i++) begin
      ra[i] = 0; rv[i] = 0;
      for (int j = 0; j < NA; j++) if (x_a[j] != 0) begin ra[i] = add(ra[i], mul(wa[i][j], s16(x_a[j]))); used++; end
      for (int j = 0; j < NV; j++) if (x_v[j] != 0) begin rv[i] = add(rv[i], mul(wv[i][j], s16(x_v[j]))); used++; end
      ra[i] = add(ra[i], wa[i][NA]);
      rv[i] = add(rv[i], wv[i][NV]);
    end
    start = 1;
    @(negedge clk); start = 0;
    wait (all_valid && all_valid2);
    sa = ra[0]; sv = rv[0];
    for (int i = 1; i < NO; i++) begin sa = add(sa, ra[i]); sv = add(sv, rv[i]); end
    cui = $urandom_range(4096) - 2048;
    @(negedge clk); cu = 16'(cui); mod_en = 1;
    @(negedge clk); mod_en = 0;
    for (int i = 0; i < NO; i++) begin
      ea = modf(ra[i], ctx(ya_prev[i], rv[i], cui));
      ev = modf(rv[i], ctx(yv_prev[i], ra[i], cui));
      checks += 2;
      if (s16(y_a[i]) != ea) begin failures++; $display("FAIL audio %0d: %0d expected %0d", i, s16(y_a[i]), ea); end
      if (s16(y_v[i]) != ev) begin failures++; $display("FAIL video %0d: %0d expected %0d", i, s16(y_v[i]), ev); end
      fired += (ea != 0) + (ev != 0);
      n_silent += (ea == 0) + (ev == 0);
      ya_prev[i] = ea; yv_prev[i] = ev;
      ea = modf(ra[i], ctx(ya2_prev[i], sv, cui));
      ev = modf(rv[i], ctx(yv2_prev[i], sa, cui));
      checks += 2;
      if (s16(y_a2[i]) != ea) begin failures++; $display("FAIL all-to-all audio %0d: %0d expected %0d", i, s16(y_a2[i]), ea); end
      if (s16(y_v2[i]) != ev) begin failures++; $display("FAIL all-to-all video %0d: %0d expected %0d", i, s16(y_v2[i]), ev); end
      if (y_a2[i] != y_a[i] || y_v2[i] != y_v[i]) n_differ++;
      fired2 += (ea != 0) + (ev != 0);
      ya2_prev[i] = ea; yv2_prev[i] = ev;
    end
    checks += 2;
    if (mac_used2 != 32'(used)) begin failures++; $display("FAIL all-to-all used %0d expected %0d", mac_used2, used); end
    if (n_fired2 != 16'(fired2)) begin failures++; $display("FAIL all-to-all fired %0d expected %0d", n_fired2, fired2); end
    checks += 2;
    if (mac_used != 32'(used)) begin failures++; $display("FAIL used %0d expected %0d", mac_used, used); end
    if (n_fired != 16'(fired)) begin failures++; $display("FAIL fired %0d expected %0d", n_fired, fired); end
  endtask

  initial begin
    for (int j = 0; j < NA; j++) x_a[j] = Q_ZERO;
    for (int j = 0; j < NV; j++) x_v[j] = Q_ZERO;
    for (int i = 0; i < NO; i++) begin ya_prev[i] = 0; yv_prev[i] = 0; ya2_prev[i] = 0; yv2_prev[i] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 20; k++) run();
    $display("silent unit outputs: %0d, units where the two variants differ: %0d", n_silent, n_differ);
    checks++;
    if (n_differ == 0) begin failures++; $display("FAIL all-to-all distal context never changed an output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
