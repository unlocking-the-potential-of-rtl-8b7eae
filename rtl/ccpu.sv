// ccpu: context-sensitive cooperative processing unit, a two-point cell.
//
// The basal (feed-forward) side computes the receptive field
//     R = sum_j w_j * x_j + bias
// with the unit's own weight memory and MAC engine (mac_unit). The apical
// side forms the integrated context C from Cp, Cd and Cu (context_integrator)
// and the modulatory block maps (R, C) to the output
//     Y = ReLU6(2R^2 + R + R + 2C(1+|R|)).
// Cp is the unit's own output of the previous inference, the register y.
// Cd (input cd) is the receptive field of the partner unit of the other
// stream; R is exported on r for the partner. Cu (input cu) is the universal
// context from the working memory. A unit whose Y is zero does not fire:
// the units it feeds skip that synapse.
//
// Interface and timing:
//   wr_en/wr_addr/wr_data  load port of the weight memory (weights 0..N_IN-1,
//                          bias at N_IN)
//   start                  one-clock pulse, begins the weighted sum of x
//   r, r_valid             r_valid rises N_IN+4 clocks after start
//   mac_used, ovf          products computed; R saturated somewhere
//   mod_en                 one-clock pulse, given once both partners'
//                          r are valid: y <= Y(r, C(y, cd, cu))
//   x must stay stable from start until r_valid.
// y is reset to zero. The structure (weight memory, MAC FSM, multiplier,
// adder, modulatory block) follows the original design; taking Cp from the
// unit's own previous output and Cd from one partner unit are choices among
// the options it describes.
module ccpu
  import mcc_pkg::*;
#(
  parameter int W = DATA_W,
  parameter int F = FRAC_W,
  localparam type q_t = logic signed [W-1:0],
  parameter int N_IN  = 22,
  parameter int DEPTH = WMEM_DEPTH,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // weight load port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  q_t            wr_data,
  // feed-forward
  input  logic          start,
  input  q_t            x [N_IN],
  output q_t            r,
  output logic          r_valid,
  output logic [AW:0]   mac_used,
  output logic          ovf,
  // context and output
  input  logic          mod_en,
  input  q_t            cd,
  input  q_t            cu,
  output q_t            y
);
  localparam q_t ZERO = '0;
  logic [AW-1:0] x_idx, mem_addr;
  logic          mem_re;
  q_t            x_val, mem_rdata, c, y_next;

  always_comb begin
    x_val = ZERO;
    for (int j = 0; j < N_IN; j++)
      if (x_idx == AW'(j)) x_val = x[j];
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
    .acc       (r),
    .valid     (r_valid),
    .mac_used  (mac_used),
    .ovf       (ovf)
  );

  context_integrator #(.W(W), .F(F)) u_ctx (.cp(y), .cd(cd), .cu(cu), .c(c));
  modulatory_block   #(.W(W), .F(F)) u_mod (.r(r), .c(c), .y(y_next));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      y <= ZERO;
    else if (mod_en) y <= y_next;
  end
endmodule
