// mcc_top: shallow audio-visual MCC network, fully parallel.
//
// Two sensory streams, audio (22 features) and video (50 features), each
// pass through four layers of two-point units (24, 12, 6 and 22 units).
// Every unit of every layer is a separate ccpu with its own weight memory
// and MAC engine. Between the streams, unit i of a layer in one stream takes
// the receptive field of unit i of the same layer in the other stream as
// distal context (the default; see CD_ALL). After each layer a working
// memory condenses both streams' outputs (and the previous memory) into a
// universal context, broadcast to all units of the next layer; the first
// layer gets none. A layer_sequencer
// runs the layers in order, and a weight_load_mux loads all memories and
// the input features from a word stream.
//
// Load targets (sel): 0 audio inputs, 1 video inputs, 2..4 working
// memories after layers 1..3, then per layer l = 1..4 the N_l audio units
// followed by the N_l video units. Each target takes one burst, words in
// address order (weights in input order, then the bias).
//
// Operation: load, pulse start, wait for done (busy in between). y_a / y_v
// then hold the network outputs, mac_used the products computed in that
// inference, n_fired the number of units with non-zero output and n_sat
// the number of units and memories whose weighted sum saturated. Units keep
// their outputs as proximal context for the next inference. One inference
// takes the sum over layers of (longest MAC of the layer + 7) clocks from
// the start edge to done, where a layer's longest MAC counts the inputs of
// its widest unit or of the working memory feeding it; at the default sizes
// 165 clocks.
//
// CD_ALL selects the distal context of every layer: 0 (default) the
// partner unit's R, 1 the sum of all R of the other stream (see mcc_layer).
//
// W / F set the word format of the whole network (default 16-bit Q3.12;
// W = 11, F = 7 gives the 11-bit Q3.7 format). The word type q_t is
// derived from W.
module mcc_top
  import mcc_pkg::*;
#(
  parameter int W = DATA_W,
  parameter int F = FRAC_W,
  localparam type q_t = logic signed [W-1:0],
  parameter int N_IN_A = 22,
  parameter int N_IN_V = 50,
  parameter int N1     = 24,
  parameter int N2     = 12,
  parameter int N3     = 6,
  parameter int N4     = 22,
  parameter int DEPTH  = WMEM_DEPTH,
  parameter int AW     = $clog2(DEPTH),
  parameter int N_TGT  = 5 + 2 * (N1 + N2 + N3 + N4),
  parameter int SW     = $clog2(N_TGT),
  parameter bit CD_ALL = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  // loading
  input  logic [SW-1:0] sel,
  input  logic          s_valid,
  input  q_t            s_data,
  input  logic          s_last,
  output logic          s_ready,
  // inference
  input  logic          start,
  output logic          busy,
  output logic          done,
  output q_t            y_a [N4],
  output q_t            y_v [N4],
  output logic [31:0]   mac_used,
  output logic [15:0]   n_fired,
  output logic [15:0]   n_sat
);
  localparam q_t ZERO = '0;
  localparam int T_L1 = 5;
  localparam int T_L2 = T_L1 + 2 * N1;
  localparam int T_L3 = T_L2 + 2 * N2;
  localparam int T_L4 = T_L3 + 2 * N3;

  logic [N_TGT-1:0] wr_en;
  logic [AW-1:0]    wr_addr;
  q_t               wr_data;

  weight_load_mux #(.W(W), .N_TGT(N_TGT), .AW(AW), .SW(SW)) u_load (
    .clk (clk), .rst_n (rst_n), .sel (sel),
    .s_valid (s_valid), .s_data (s_data), .s_last (s_last), .s_ready (s_ready),
    .wr_en (wr_en), .wr_addr (wr_addr), .wr_data (wr_data)
  );

  // input layer
  q_t x_a [N_IN_A];
  q_t x_v [N_IN_V];
  input_buffer #(.W(W), .N(N_IN_A), .AW(AW)) u_in_a (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en[0]), .wr_addr (wr_addr),
    .wr_data (wr_data), .x (x_a));
  input_buffer #(.W(W), .N(N_IN_V), .AW(AW)) u_in_v (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en[1]), .wr_addr (wr_addr),
    .wr_data (wr_data), .x (x_v));

  // sequencing
  logic [3:0] layer_start, layer_done, mod_en;
  layer_sequencer #(.N_LAYERS(4)) u_seq (
    .clk (clk), .rst_n (rst_n), .start (start), .layer_done (layer_done),
    .layer_start (layer_start), .mod_en (mod_en), .busy (busy), .done (done)
  );

  // layers and working memories
  q_t y1_a [N1];  q_t y1_v [N1];
  q_t y2_a [N2];  q_t y2_v [N2];
  q_t y3_a [N3];  q_t y3_v [N3];
  q_t m1, m2, m3;
  logic [3:0]  lv;
  logic [2:0]  mv;
  logic [31:0] used_l [4];
  logic [AW:0] used_m [3];
  logic [15:0] fired_l [4];
  logic [15:0] sat_l [4];
  logic [2:0]  sat_m;

  mcc_layer #(.W(W), .F(F), .N_IN_A(N_IN_A), .N_IN_V(N_IN_V), .N_OUT(N1),
              .DEPTH(DEPTH), .CD_ALL(CD_ALL)) u_l1 (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en[T_L1 +: 2*N1]),
    .wr_addr (wr_addr), .wr_data (wr_data), .start (layer_start[0]),
    .x_a (x_a), .x_v (x_v), .mod_en (mod_en[0]), .cu (ZERO),
    .y_a (y1_a), .y_v (y1_v), .all_valid (lv[0]),
    .mac_used (used_l[0]), .n_fired (fired_l[0]), .n_sat (sat_l[0]));

  working_memory #(.W(W), .F(F), .N_A(N1), .N_V(N1), .DEPTH(DEPTH)) u_m1 (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en[2]), .wr_addr (wr_addr),
    .wr_data (wr_data), .start (layer_start[1]), .m_prev (ZERO),
    .a (y1_a), .v (y1_v), .m (m1), .valid (mv[0]), .mac_used (used_m[0]), .ovf (sat_m[0]));

  mcc_layer #(.W(W), .F(F), .N_IN_A(N1), .N_IN_V(N1), .N_OUT(N2),
              .DEPTH(DEPTH), .CD_ALL(CD_ALL)) u_l2 (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en[T_L2 +: 2*N2]),
    .wr_addr (wr_addr), .wr_data (wr_data), .start (layer_start[1]),
    .x_a (y1_a), .x_v (y1_v), .mod_en (mod_en[1]), .cu (m1),
    .y_a (y2_a), .y_v (y2_v), .all_valid (lv[1]),
    .mac_used (used_l[1]), .n_fired (fired_l[1]), .n_sat (sat_l[1]));

  working_memory #(.W(W), .F(F), .N_A(N2), .N_V(N2), .DEPTH(DEPTH)) u_m2 (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en[3]), .wr_addr (wr_addr),
    .wr_data (wr_data), .start (layer_start[2]), .m_prev (m1),
    .a (y2_a), .v (y2_v), .m (m2), .valid (mv[1]), .mac_used (used_m[1]), .ovf (sat_m[1]));

  mcc_layer #(.W(W), .F(F), .N_IN_A(N2), .N_IN_V(N2), .N_OUT(N3),
              .DEPTH(DEPTH), .CD_ALL(CD_ALL)) u_l3 (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en[T_L3 +: 2*N3]),
    .wr_addr (wr_addr), .wr_data (wr_data), .start (layer_start[2]),
    .x_a (y2_a), .x_v (y2_v), .mod_en (mod_en[2]), .cu (m2),
    .y_a (y3_a), .y_v (y3_v), .all_valid (lv[2]),
    .mac_used (used_l[2]), .n_fired (fired_l[2]), .n_sat (sat_l[2]));

  working_memory #(.W(W), .F(F), .N_A(N3), .N_V(N3), .DEPTH(DEPTH)) u_m3 (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en[4]), .wr_addr (wr_addr),
    .wr_data (wr_data), .start (layer_start[3]), .m_prev (m2),
    .a (y3_a), .v (y3_v), .m (m3), .valid (mv[2]), .mac_used (used_m[2]), .ovf (sat_m[2]));

  mcc_layer #(.W(W), .F(F), .N_IN_A(N3), .N_IN_V(N3), .N_OUT(N4),
              .DEPTH(DEPTH), .CD_ALL(CD_ALL)) u_l4 (
    .clk (clk), .rst_n (rst_n), .wr_en (wr_en[T_L4 +: 2*N4]),
    .wr_addr (wr_addr), .wr_data (wr_data), .start (layer_start[3]),
    .x_a (y3_a), .x_v (y3_v), .mod_en (mod_en[3]), .cu (m3),
    .y_a (y_a), .y_v (y_v), .all_valid (lv[3]),
    .mac_used (used_l[3]), .n_fired (fired_l[3]), .n_sat (sat_l[3]));

  // a layer is done when its units and the memory feeding its context are
  assign layer_done = {lv[3] & mv[2], lv[2] & mv[1], lv[1] & mv[0], lv[0]};

  always_comb begin
    mac_used = used_l[0] + used_l[1] + used_l[2] + used_l[3]
             + 32'(used_m[0]) + 32'(used_m[1]) + 32'(used_m[2]);
    n_fired  = fired_l[0] + fired_l[1] + fired_l[2] + fired_l[3];
    n_sat    = sat_l[0] + sat_l[1] + sat_l[2] + sat_l[3]
             + 16'(sat_m[0]) + 16'(sat_m[1]) + 16'(sat_m[2]);
  end
endmodule
