// weight_bram -- hidden-to-output weight memory of one output neuron.
//
// DEPTH words of W bits: word i holds W(i, c), the weight from hidden neuron
// i to this output neuron c. One synchronous write port and one read port
// whose data is available in the same cycle as the address (the access
// pattern the weight-update timing relies on: read at address i in cycle t,
// write back at address i in cycle t+1 while address i+1 is read). The paper
// stores these weights in block RAM; the same-cycle read makes this a
// distributed-RAM style array in an FPGA flow. Contents are not reset: the
// controller writes zero to every word after reset.
module weight_bram #(
  parameter int unsigned DEPTH = 1700,
  parameter int unsigned W     = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
