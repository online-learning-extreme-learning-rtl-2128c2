// itp -- in-training prediction (ITP) accumulator of one output neuron.
//
// Computes o_c = sum_i h_i * W(i, c) serially: while en is high, one hidden
// activation h_i and the matching weight W(i, c) arrive per cycle, and the
// weight is added when h_i = 1 -- h is binary, so no multiplier is needed.
// The 16-bit Q8.8 sum saturates (this design's choice of overflow handling).
// clear zeroes the sum; o is the registered sum, complete one cycle after
// the last enabled term.
module itp
  import splr_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  en,
  input  logic  h_bit,
  input  word_t w,
  output word_t o
);
  always_ff @(posedge clk) begin
    if (!rst_n || clear)  o <= '0;
    else if (en && h_bit) o <= sat16(33'(o) + 33'(w));
  end
endmodule
