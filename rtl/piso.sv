// piso -- parallel-in serial-out register.
//
// load captures N elements of W bits at the clock edge; each shift moves the
// register down one element, so element 0 appears on dout first, then 1, and
// so on (neuron-index order). load has priority over shift. Used in the
// hidden layer (W = 1: the M activations h go to the output layer one bit per
// cycle) and in the output layer (W = 16: the C outputs o leave one per cycle
// in inference).
module piso #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,
  input  logic           shift,
  input  logic [N*W-1:0] din,
  output logic [W-1:0]   dout
);
  logic [N*W-1:0] sr;

  always_ff @(posedge clk) begin
    if (!rst_n)     sr <= '0;
    else if (load)  sr <= din;
    else if (shift) sr <= {{W{1'b0}}, sr[N*W-1:W]};
  end

  assign dout = sr[W-1:0];
endmodule
