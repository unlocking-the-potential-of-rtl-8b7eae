// mac_unit: MAC FSM and multiply-accumulate datapath of one processing unit.
//
// After a start pulse the FSM walks an address k = 0..N_IN through the
// weight memory, one step per clock, and at the same time presents k on
// x_idx so that the surrounding unit selects input x[k] onto x_val. Step
// k = N_IN fetches the bias, whose input is hard-wired to 1.0, so
//     acc = sat( ... sat(sat(0 + w0*x0) + w1*x1) ... + bias )
// with every product and sum saturating in the W-bit word format (Q3.12
// by default).
//
// Pipeline (one synapse enters per clock, each takes 4 clocks):
//   1 issue     : memory address and input index presented
//   2 operands  : weight read data and the input captured in w_q / x_q
//   3 multiply  : product captured in p_q
//   4 accumulate: acc <= acc + p_q
// A synapse whose input is zero is skipped: the memory read enable and the
// clock enables of w_q, x_q, p_q and acc stay low for it, so nothing in the
// datapath switches. It adds nothing to the sum since w*0 = 0. mac_used
// counts the products actually computed (the bias is not counted); ovf is
// a sticky flag set when any product or partial sum of the run saturated.
//
// Timing: start is sampled on a clock edge; valid rises N_IN+4 edges later
// and acc then holds the result until the next start. valid is cleared by
// start. N_IN must not exceed DEPTH-1.
//
// One address per clock, four clocks per multiply-accumulate, the bias as a
// weight after all others and zero-skipping follow the original design; the
// start/valid protocol and the used-MAC counter are this implementation's.
module mac_unit
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
  input  logic          start,
  // input selection
  output logic [AW-1:0] x_idx,
  input  q_t            x_val,
  // weight memory read port
  output logic          mem_re,
  output logic [AW-1:0] mem_addr,
  input  q_t            mem_rdata,
  // result
  output q_t            acc,
  output logic          valid,
  output logic [AW:0]   mac_used,
  output logic          ovf
);
  localparam q_t ZERO = '0;
  localparam q_t ONE  = q_t'(1) <<< F;
  typedef enum logic [0:0] {S_IDLE, S_RUN} state_e;
  state_e        state;
  logic [AW-1:0] k;

  logic is_bias, issue_nz;
  // stage registers
  logic s1_v, s1_bias;  q_t s1_x;
  logic s2_v, s2_bias;  q_t w_q, x_q;
  logic s3_v, s3_bias;  q_t p_q;  logic p_ovf;

  q_t   prod, sum;
  logic prod_ovf, sum_ovf;

  assign is_bias  = (k == AW'(N_IN));
  assign issue_nz = (state == S_RUN) && (is_bias || (x_val != ZERO));
  assign x_idx    = k;
  assign mem_addr = k;
  assign mem_re   = issue_nz;

  fxp_mul #(.W(W), .F(F)) u_mul (.a(w_q), .b(x_q), .y(prod), .ovf(prod_ovf));
  fxp_add #(.W(W)) u_add (.a(acc), .b(p_q), .sub(1'b0), .y(sum), .ovf(sum_ovf));

  // FSM: address generator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k     <= '0;
    end else if (start) begin
      state <= S_RUN;
      k     <= '0;
    end else if (state == S_RUN) begin
      if (is_bias) state <= S_IDLE;
      else         k     <= k + 1'b1;
    end
  end

  // valid bits of the pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s1_v, s1_bias, s2_v, s2_bias, s3_v, s3_bias} <= '0;
    end else begin
      s1_v    <= issue_nz && !start;
      s1_bias <= issue_nz && is_bias && !start;
      s2_v    <= s1_v;
      s2_bias <= s1_bias;
      s3_v    <= s2_v;
      s3_bias <= s2_bias;
    end
  end

  // datapath registers, clock-enabled only for non-zero synapses
  always_ff @(posedge clk) begin
    if (issue_nz) s1_x <= is_bias ? ONE : x_val;
    if (s1_v) begin
      w_q <= mem_rdata;
      x_q <= s1_x;
    end
    if (s2_v) begin
      p_q   <= prod;
      p_ovf <= prod_ovf;
    end
  end

  // accumulator, used-MAC counter and result flag
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= ZERO;
      valid    <= 1'b0;
      mac_used <= '0;
      ovf      <= 1'b0;
    end else if (start) begin
      acc      <= ZERO;
      valid    <= 1'b0;
      mac_used <= '0;
      ovf      <= 1'b0;
    end else if (s3_v) begin
      acc <= sum;
      if (sum_ovf || p_ovf) ovf <= 1'b1;
      if (s3_bias) valid    <= 1'b1;
      else         mac_used <= mac_used + 1'b1;
    end
  end

  // The bias step ends the run, so a run never issues more than N_IN+1 steps.
  initial assert (N_IN >= 1 && N_IN < DEPTH)
    else $error("mac_unit: N_IN=%0d does not fit a weight memory of %0d words", N_IN, DEPTH);
endmodule
