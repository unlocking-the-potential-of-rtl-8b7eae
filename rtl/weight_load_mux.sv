// weight_load_mux: attaches the memories, one at a time, to the loader.
//
// The control processor picks a target with sel and the data mover streams
// that target's words (s_valid/s_data, s_last on the final word). Word n of
// a burst is written to address n of the selected target: wr_en is one-hot
// on bit sel, wr_addr and wr_data are shared by all targets. The address
// returns to 0 after s_last and whenever sel changes. The port is always
// ready. Outputs are registered: a word accepted on one clock edge is
// written on the next. sel values >= N_TGT write nothing.
// Loading happens once after power-up, so it does not affect inference
// latency. Loading the memories in turn through a multiplexer follows the
// original design; the stream protocol and numbering are this
// implementation's.
module weight_load_mux
  import mcc_pkg::*;
#(
  parameter int W = DATA_W,
  localparam type q_t = logic signed [W-1:0],
  parameter int N_TGT = 133,
  parameter int AW    = WMEM_AW,
  parameter int SW    = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SW-1:0]    sel,
  input  logic             s_valid,
  input  q_t               s_data,
  input  logic             s_last,
  output logic             s_ready,
  output logic [N_TGT-1:0] wr_en,
  output logic [AW-1:0]    wr_addr,
  output q_t               wr_data
);
  localparam q_t ZERO = '0;
  logic [AW-1:0] addr;
  logic [SW-1:0] sel_q;

  assign s_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr    <= '0;
      sel_q   <= '0;
      wr_en   <= '0;
      wr_addr <= '0;
      wr_data <= ZERO;
    end else begin
      sel_q <= sel;
      wr_en <= '0;
      if (s_valid) begin
        // a change of target restarts at address 0
        wr_addr <= (sel != sel_q) ? '0 : addr;
        wr_data <= s_data;
        for (int t = 0; t < N_TGT; t++)
          wr_en[t] <= (sel == SW'(t));
        addr <= s_last ? '0 : (((sel != sel_q) ? '0 : addr) + 1'b1);
      end else if (sel != sel_q) begin
        addr <= '0;
      end
    end
  end

  initial assert (N_TGT <= (1 << SW))
    else $error("weight_load_mux: %0d targets need more than %0d select bits", N_TGT, SW);
endmodule
