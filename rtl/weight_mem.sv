// weight_mem: the local weight memory of one processing unit.
//
// A simple dual-port RAM of DEPTH words of W bits, written in block RAM
// style: one write port used only while loading, one synchronous read port
// used by the MAC FSM. Words 0..N-1 hold the weights of the N inputs in
// input order and word N holds the bias. The read data appears one clock
// after raddr is presented with re high, and holds while re is low (so a
// skipped zero synapse causes no switching on the read port).
//
// There is no reset; contents are undefined until loaded.
module weight_mem #(
  parameter int DEPTH = mcc_pkg::WMEM_DEPTH,
  parameter int W     = mcc_pkg::DATA_W,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
