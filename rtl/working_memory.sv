// working_memory: cross-modal working memory (the "M" unit).
//
// Extracts the universal context shared by both sensory streams. After a
// layer has produced its audio outputs a[] and video outputs v[], this unit
// forms
//     m = w0*m_prev + sum_i wa_i*a_i + sum_i wv_i*v_i + bias
// where m_prev is the m of the layer before (zero for the first). m is then
// broadcast as Cu to every unit of the next layer. The weighted sum runs on
// the same weight memory and MAC engine as a processing unit, so only the
// non-zero (firing) outputs of the layer cost a multiply: the incoherent,
// silent units add nothing. No activation is applied to m.
//
// Weight memory layout: word 0 weight of m_prev, words 1..N_A audio, words
// N_A+1..N_A+N_V video, word N_A+N_V+1 bias.
// Timing: start pulse, valid rises N_A+N_V+5 clocks later; inputs stable
// from start until valid.
// The sum over the previous memory and both streams follows the equation of
// the original design for the universal context; one scalar m per layer is
// this implementation's choice.
module working_memory
  import mcc_pkg::*;
#(
  parameter int W = DATA_W,
  parameter int F = FRAC_W,
  localparam type q_t = logic signed [W-1:0],
  parameter int N_A   = 24,
  parameter int N_V   = 24,
  parameter int DEPTH = WMEM_DEPTH,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  q_t            wr_data,
  input  logic          start,
  input  q_t            m_prev,
  input  q_t            a [N_A],
  input  q_t            v [N_V],
  output q_t            m,
  output logic          valid,
  output logic [AW:0]   mac_used,
  output logic          ovf
);
  localparam q_t ZERO = '0;
  localparam int N_IN = 1 + N_A + N_V;

  logic [AW-1:0] x_idx, mem_addr;
  logic          mem_re;
  q_t            x_val, mem_rdata;

  always_comb begin
    x_val = ZERO;
    if (x_idx == '0) x_val = m_prev;
    for (int i = 0; i < N_A; i++)
      if (x_idx == AW'(1 + i)) x_val = a[i];
    for (int i = 0; i < N_V; i++)
      if (x_idx == AW'(1 + N_A + i)) x_val = v[i];
  end

  weight_mem #(.DEPTH(DEPTH), .W(W)) u_wmem (
    .clk   (clk),
    .we    (wr_en),
    .waddr (wr_addr),
    .wdata (wr_data),
    .re    (mem_re),
    .raddr (mem_addr),
    .rdata (mem_rdata)
  );

  mac_unit #(.W(W), .F(F), .N_IN(N_IN), .DEPTH(DEPTH)) u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .x_idx     (x_idx),
    .x_val     (x_val),
    .mem_re    (mem_re),
    .mem_addr  (mem_addr),
    .mem_rdata (mem_rdata),
    .acc       (m),
    .valid     (valid),
    .mac_used  (mac_used),
    .ovf       (ovf)
  );
endmodule
