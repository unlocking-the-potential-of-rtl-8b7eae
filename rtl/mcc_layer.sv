// mcc_layer: one layer of the two-stream network.
//
// N_OUT audio units and N_OUT video units (ccpu), all working in parallel.
// Distal context Cd, chosen by CD_ALL:
//   CD_ALL = 0 (default): audio unit i and video unit i are partners; each
//     receives the other's receptive field R as Cd (the two-unit circuit).
//   CD_ALL = 1: every unit is connected to all units of the other stream;
//     its Cd is the saturating sum, without weights, of all N_OUT R values
//     of that stream, added in unit order (index 0 first). One sum per
//     stream is shared by all units of the other stream.
// The all-to-all connection is described in words in the original; having
// no weights on it and the order of the adder chain are this design's
// choices. The sum is not registered: it puts a chain of N_OUT-1 adders in
// front of the context arithmetic, on a path whose inputs (the R values)
// are stable from all_valid until the next start.
//
// All units of the layer receive the same universal context cu. The audio
// units read x_a (N_IN_A inputs), the video units x_v (N_IN_V inputs).
//
// Load port: wr_en[i] selects audio unit i, wr_en[N_OUT+i] video unit i.
// start begins all weighted sums; all_valid is high once every unit's R is
// valid; mod_en then registers every unit's output on y_a / y_v.
// mac_used is the number of products computed by the layer in its last run
// n_fired the number of units whose output is non-zero and n_sat the
// number of units whose weighted sum saturated.
module mcc_layer
  import mcc_pkg::*;
#(
  parameter int W = DATA_W,
  parameter int F = FRAC_W,
  localparam type q_t = logic signed [W-1:0],
  parameter int N_IN_A = 22,
  parameter int N_IN_V = 50,
  parameter int N_OUT  = 24,
  parameter int DEPTH  = WMEM_DEPTH,
  parameter int AW     = $clog2(DEPTH),
  parameter bit CD_ALL = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [2*N_OUT-1:0] wr_en,
  input  logic [AW-1:0]      wr_addr,
  input  q_t                 wr_data,
  input  logic               start,
  input  q_t                 x_a [N_IN_A],
  input  q_t                 x_v [N_IN_V],
  input  logic               mod_en,
  input  q_t                 cu,
  output q_t                 y_a [N_OUT],
  output q_t                 y_v [N_OUT],
  output logic               all_valid,
  output logic [31:0]        mac_used,
  output logic [15:0]        n_fired,
  output logic [15:0]        n_sat
);
  localparam q_t ZERO = '0;
  q_t          r_a [N_OUT];
  q_t          r_v [N_OUT];
  logic [N_OUT-1:0] rv_a, rv_v, ovf_a, ovf_v;
  logic [AW:0] used_a [N_OUT];
  logic [AW:0] used_v [N_OUT];
  q_t          cd_a [N_OUT];   // distal context of audio unit i
  q_t          cd_v [N_OUT];   // distal context of video unit i

  if (CD_ALL) begin : g_cd_all
    q_t sum_a [N_OUT];           // running sums of the audio R values
    q_t sum_v [N_OUT];           // running sums of the video R values
    logic [N_OUT-1:0] ovf_sa, ovf_sv;   // saturation of the sums (not used)
    assign sum_a[0] = r_a[0];
    assign sum_v[0] = r_v[0];
    assign ovf_sa[0] = 1'b0;
    assign ovf_sv[0] = 1'b0;
    for (genvar k = 1; k < N_OUT; k++) begin : g_sum
      fxp_add #(.W(W)) u_sa (.a(sum_a[k-1]), .b(r_a[k]), .sub(1'b0), .y(sum_a[k]), .ovf(ovf_sa[k]));
      fxp_add #(.W(W)) u_sv (.a(sum_v[k-1]), .b(r_v[k]), .sub(1'b0), .y(sum_v[k]), .ovf(ovf_sv[k]));
    end
    for (genvar i = 0; i < N_OUT; i++) begin : g_cd
      assign cd_a[i] = sum_v[N_OUT-1];
      assign cd_v[i] = sum_a[N_OUT-1];
    end
  end else begin : g_cd_pair
    for (genvar i = 0; i < N_OUT; i++) begin : g_cd
      assign cd_a[i] = r_v[i];
      assign cd_v[i] = r_a[i];
    end
  end

  for (genvar i = 0; i < N_OUT; i++) begin : g_pair
    ccpu #(.W(W), .F(F), .N_IN(N_IN_A), .DEPTH(DEPTH)) u_audio (
      .clk (clk), .rst_n (rst_n),
      .wr_en (wr_en[i]), .wr_addr (wr_addr), .wr_data (wr_data),
      .start (start), .x (x_a), .r (r_a[i]), .r_valid (rv_a[i]),
      .mac_used (used_a[i]), .ovf (ovf_a[i]),
      .mod_en (mod_en), .cd (cd_a[i]), .cu (cu), .y (y_a[i])
    );
    ccpu #(.W(W), .F(F), .N_IN(N_IN_V), .DEPTH(DEPTH)) u_video (
      .clk (clk), .rst_n (rst_n),
      .wr_en (wr_en[N_OUT+i]), .wr_addr (wr_addr), .wr_data (wr_data),
      .start (start), .x (x_v), .r (r_v[i]), .r_valid (rv_v[i]),
      .mac_used (used_v[i]), .ovf (ovf_v[i]),
      .mod_en (mod_en), .cd (cd_v[i]), .cu (cu), .y (y_v[i])
    );
  end

  assign all_valid = (&rv_a) && (&rv_v);

  always_comb begin
    mac_used = '0;
    n_fired  = '0;
    n_sat    = '0;
    for (int i = 0; i < N_OUT; i++) begin
      mac_used = mac_used + 32'(used_a[i]) + 32'(used_v[i]);
      n_fired  = n_fired + 16'(y_a[i] != ZERO) + 16'(y_v[i] != ZERO);
      n_sat    = n_sat + 16'(ovf_a[i]) + 16'(ovf_v[i]);
    end
  end
endmodule
