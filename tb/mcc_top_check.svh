// mcc_top_check: body shared by the end-to-end testbenches of mcc_top.
//
// Included inside a testbench module that first defines the word format
// under test (localparams TB_W, TB_F) and the distal-context mode
// (TB_CD_ALL, matching the CD_ALL parameter of the top) and afterwards instantiates mcc_top
// as "dut" with .* connections. It declares the testbench signals, the
// clock and an integer reference model of the whole network, and provides
// the task run_test; the including module calls it, adds a watchdog and
// prints the result line.
//
// The test loads every weight memory, the three working memories and both
// input buffers through the word stream, then runs several inferences,
// reloading only the inputs in between, so the proximal context (each
// unit's previous output) carries over. The reference model predicts every
// output, the number of products computed, the number of firing units, the
// number of saturated sums and the inference latency (sum over layers of
// longest MAC + 7 clocks). It also counts how often each mechanism of the
// design occurred in the reference run and fails if one never did: skipped
// zero synapses, silent units, outputs clipped at 6, saturated sums, units
// made to fire by their context, non-zero universal context and non-zero
// proximal context. Random values are drawn in Q3.12 and shifted to the
// format under test, so both formats see the same pattern.
  localparam int NL = 4;
  localparam int N_IN_A = 22, N_IN_V = 50;
  localparam int NS [NL+1] = '{0, 24, 12, 6, 22};    // units per stream per layer
  localparam int N_INFER = 4;

  logic clk = 0, rst_n = 0, s_valid = 0, s_last = 0, s_ready, start = 0, busy, done;
  logic [7:0] sel = '0;
  logic signed [TB_W-1:0] s_data = '0;
  logic signed [TB_W-1:0] y_a [22];
  logic signed [TB_W-1:0] y_v [22];
  logic [31:0] mac_used;
  logic [15:0] n_fired, n_sat;

  always #5 clk = ~clk;

  // ---------------- reference model state
  int fan_a [NL], fan_v [NL], base [NL];
  int w [NL][2][24][51];     // [layer][stream][unit][weight..., bias]
  int wm [3][51];            // working memories: m_prev, audio, video, bias
  int yprev [NL][2][24];
  int xa [N_IN_A];
  int xv [N_IN_V];
  int checks = 0, failures = 0;
  // mechanism counters
  int ev_skip = 0, ev_silent = 0, ev_clip = 0, ev_sat = 0, ev_ctx_fire = 0, ev_cu = 0, ev_cp = 0;

  // random values drawn in Q3.12 and scaled to the word format under test
  function automatic int rnd_w();
    if ($urandom_range(99) < 3) return (int'($urandom_range(57344)) - 28672) >>> (12 - TB_F);  // rare large weight
    return (int'($urandom_range(5000)) - 2500) >>> (12 - TB_F);                                // |w| < 0.61
  endfunction

  function automatic int rnd_x();
    if ($urandom_range(99) < 30) return 0;
    return (int'($urandom_range(8192)) - 4096) >>> (12 - TB_F);
  endfunction

  task automatic send(int tgt, int n, ref int vals [51]);
    @(negedge clk); sel = 8'(tgt); s_valid = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk); s_valid = 1; s_data = TB_W'(vals[i]); s_last = (i == n - 1);
    end
    @(negedge clk); s_valid = 0; s_last = 0;
  endtask

  task automatic load_inputs();
    int buf51 [51];
    for (int i = 0; i < N_IN_A; i++) begin xa[i] = rnd_x(); buf51[i] = xa[i]; end
    send(0, N_IN_A, buf51);
    for (int i = 0; i < N_IN_V; i++) begin xv[i] = rnd_x(); buf51[i] = xv[i]; end
    send(1, N_IN_V, buf51);
  endtask

  task automatic load_weights();
    int buf51 [51];
    for (int l = 0; l < NL; l++)
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < NS[l+1]; i++) begin
          int f = s ? fan_v[l] : fan_a[l];
          for (int j = 0; j <= f; j++) begin w[l][s][i][j] = rnd_w(); buf51[j] = w[l][s][i][j]; end
          send(base[l] + s * NS[l+1] + i, f + 1, buf51);
        end
    for (int k = 0; k < 3; k++) begin
      int f = 1 + 2 * NS[k+1];
      for (int j = 0; j <= f; j++) begin wm[k][j] = rnd_w(); buf51[j] = wm[k][j]; end
      send(2 + k, f + 1, buf51);
    end
  endtask

  // weighted sum as the MAC computes it: zero inputs skipped, bias last
  task automatic mac(input int wv [51], input int in [51], input int f,
                     output int acc, output int used, output bit sat);
    acc = 0; used = 0; sat = 0;
    for (int j = 0; j < f; j++)
      if (in[j] != 0) begin
        sat |= mul_ovf(wv[j], in[j]) | add_ovf(acc, mul(wv[j], in[j]));
        acc = add(acc, mul(wv[j], in[j]));
        used++;
      end else ev_skip++;
    sat |= add_ovf(acc, wv[f]);
    acc = add(acc, wv[f]);
  endtask

  task automatic infer(int n);
    int in [2][51];
    int r [2][24];
    int rsum [2];
    int y [2][24];
    int m_prev = 0, cu = 0, used_tot = 0, fired = 0, nsat = 0, lat = 0, exp_lat = 0;
    int acc, used, c, yy;
    bit sat;
    for (int j = 0; j < 51; j++) begin in[0][j] = 0; in[1][j] = 0; end
    for (int j = 0; j < N_IN_A; j++) in[0][j] = xa[j];
    for (int j = 0; j < N_IN_V; j++) in[1][j] = xv[j];
    for (int l = 0; l < NL; l++) begin
      int longest = (fan_a[l] > fan_v[l]) ? fan_a[l] : fan_v[l];
      // working memory fed by the previous layer
      if (l > 0) begin
        int min [51];
        int f = 1 + 2 * NS[l];
        min[0] = m_prev;
        for (int i = 0; i < NS[l]; i++) begin min[1+i] = in[0][i]; min[1+NS[l]+i] = in[1][i]; end
        mac(wm[l-1], min, f, acc, used, sat);
        used_tot += used; nsat += sat;
        cu = acc; m_prev = acc;
        if (cu != 0) ev_cu++;
        if (f > longest) longest = f;
      end
      exp_lat += longest + 7;
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < NS[l+1]; i++) begin
          mac(w[l][s][i], in[s], s ? fan_v[l] : fan_a[l], acc, used, sat);
          r[s][i] = acc; used_tot += used; nsat += sat;
        end
      // all-to-all distal context: saturating sum of each stream's R, in unit order
      for (int s = 0; s < 2; s++) begin
        rsum[s] = r[s][0];
        for (int i = 1; i < NS[l+1]; i++) rsum[s] = add(rsum[s], r[s][i]);
      end
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < NS[l+1]; i++) begin
          if (yprev[l][s][i] != 0) ev_cp++;
          c  = ctx(yprev[l][s][i], TB_CD_ALL ? rsum[1-s] : r[1-s][i], cu);
          yy = modf(r[s][i], c);
          if (yy == 0) ev_silent++; else fired++;
          if (yy == SIX) ev_clip++;
          if (yy != 0 && modf(r[s][i], 0) == 0) ev_ctx_fire++;
          y[s][i] = yy;
          yprev[l][s][i] = yy;
        end
      for (int j = 0; j < 51; j++) begin
        in[0][j] = (j < NS[l+1]) ? y[0][j] : 0;
        in[1][j] = (j < NS[l+1]) ? y[1][j] : 0;
      end
    end
    ev_sat += nsat;
    // run the hardware
    @(negedge clk); start = 1;
    @(posedge clk); #1 start = 0;
    while (!done && lat < 1000) begin @(posedge clk); #1 lat++; end
    checks++;
    if (lat != exp_lat) begin failures++; $display("FAIL inference %0d took %0d clocks, expected %0d", n, lat, exp_lat); end
    for (int i = 0; i < 22; i++) begin
      checks += 2;
      if (int'(y_a[i]) != y[0][i]) begin failures++; $display("FAIL inf %0d audio out %0d: %0d expected %0d", n, i, int'(y_a[i]), y[0][i]); end
      if (int'(y_v[i]) != y[1][i]) begin failures++; $display("FAIL inf %0d video out %0d: %0d expected %0d", n, i, int'(y_v[i]), y[1][i]); end
    end
    checks += 3;
    if (mac_used != 32'(used_tot)) begin failures++; $display("FAIL mac_used %0d expected %0d", mac_used, used_tot); end
    if (n_fired != 16'(fired)) begin failures++; $display("FAIL n_fired %0d expected %0d", n_fired, fired); end
    if (n_sat != 16'(nsat)) begin failures++; $display("FAIL n_sat %0d expected %0d", n_sat, nsat); end
    $display("inference %0d: %0d clocks, %0d products, %0d of 128 units fired", n, lat, used_tot, fired);
  endtask

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %-28s occurred %0d times", what, count);
    if (count == 0) begin failures++; $display("FAIL mechanism never occurred: %s", what); end
  endtask

  // the whole test; the including testbench reports the result
  task automatic run_test();
    fan_a = '{N_IN_A, 24, 12, 6};
    fan_v = '{N_IN_V, 24, 12, 6};
    base  = '{5, 5 + 48, 5 + 48 + 24, 5 + 48 + 24 + 12};
    set_format(TB_W, TB_F);
    for (int l = 0; l < NL; l++) for (int s = 0; s < 2; s++) for (int i = 0; i < 24; i++) yprev[l][s][i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    load_weights();
    for (int n = 0; n < N_INFER; n++) begin
      load_inputs();
      infer(n);
    end
    need("zero synapse skipped", ev_skip);
    need("unit silent (not firing)", ev_silent);
    need("output clipped at 6", ev_clip);
    need("weighted sum saturated", ev_sat);
    need("unit fired only by context", ev_ctx_fire);
    need("non-zero universal context", ev_cu);
    need("non-zero proximal context", ev_cp);
  endtask
