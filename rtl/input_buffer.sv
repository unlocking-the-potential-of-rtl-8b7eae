// input_buffer: feature registers of the input layer of one stream.
//
// N registers of W-bit words (Q3.12 by default), written one word at a
// time through the same load multiplexer as the weight memories (wr_en,
// wr_addr, wr_data) and read in parallel on x. Writes to addresses >= N are ignored. Reset
// clears all registers. Loading the inputs by multiplexing follows the
// original design; the register form is this implementation's.
module input_buffer
  import mcc_pkg::*;
#(
  parameter int W = DATA_W,
  localparam type q_t = logic signed [W-1:0],
  parameter int N  = 22,
  parameter int AW = WMEM_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  q_t            wr_data,
  output q_t            x [N]
);
  localparam q_t ZERO = '0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) x[i] <= ZERO;
    end else if (wr_en) begin
      for (int i = 0; i < N; i++)
        if (wr_addr == AW'(i)) x[i] <= wr_data;
    end
  end
endmodule
