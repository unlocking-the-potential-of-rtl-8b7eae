// layer_sequencer: runs one inference through the layers in order.
//
// All units of all layers exist in hardware; this FSM only orders them.
// For each layer l = 0..N_LAYERS-1:
//   L_START : pulse layer_start[l] (starts every unit of layer l in both
//             streams and the working memory fed by layer l-1)
//   L_WAIT  : wait until layer_done[l] (all those MACs valid)
//   L_MOD   : pulse mod_en[l]; the units of layer l register their outputs
// then on to the next layer. After the last layer done pulses for one
// clock. start is ignored while busy.
// Timing: start is sampled on a clock edge; each layer then spends one
// clock in L_START, waits in L_WAIT until the clock after layer_done is
// seen high, and one clock in L_MOD; done follows the last L_MOD.
// The layer-by-layer order is this implementation's; the original design
// states only that all units are physically present and work in parallel.
module layer_sequencer #(
  parameter int N_LAYERS = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N_LAYERS-1:0] layer_done,
  output logic [N_LAYERS-1:0] layer_start,
  output logic [N_LAYERS-1:0] mod_en,
  output logic                busy,
  output logic                done
);
  localparam int LW = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_START, S_WAIT, S_MOD} state_e;
  state_e        state;
  logic [LW-1:0] layer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      layer <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) begin
                   state <= S_START;
                   layer <= '0;
                 end
        S_START: state <= S_WAIT;
        S_WAIT:  if (layer_done[layer]) state <= S_MOD;
        S_MOD:   if (layer == LW'(N_LAYERS - 1)) begin
                   state <= S_IDLE;
                   done  <= 1'b1;
                 end else begin
                   state <= S_START;
                   layer <= layer + 1'b1;
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    layer_start = '0;
    mod_en      = '0;
    if (state == S_START) layer_start[layer] = 1'b1;
    if (state == S_MOD)   mod_en[layer]      = 1'b1;
  end

  assign busy = (state != S_IDLE);
endmodule
