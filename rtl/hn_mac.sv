// hn_mac -- multiply-accumulate unit of one hidden neuron.
//
// Computes the pre-activation W_in(j,:) * x + b_j of hidden neuron j. Each
// valid pixel x (Q8.8) is multiplied by the PRNG weight w (Q1.15); the 32-bit
// product is shifted right by 15 to return to Q8.8 and added to the running
// sum. After the last pixel the controller raises bias_add for one cycle and
// a multiplexer routes sum + bias into the sum register instead. Both adders
// saturate to the signed 16-bit range (the paper's overflow/underflow
// control; saturation as the way of doing it is this design's choice).
//
// Interface / timing: all inputs are sampled at the rising edge; sum is the
// registered result, valid one cycle after the last x_valid (S_D) and one
// cycle after bias_add (biased sum). clear has priority and zeroes the sum.
module hn_mac
  import splr_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  x_valid,
  input  word_t x,
  input  word_t w,
  input  logic  bias_add,
  input  word_t bias,
  output word_t sum
);
  logic signed [31:0] prod;
  word_t              prod_q88;
  word_t              sum_prod, sum_bias;

  always_comb begin
    prod     = x * w;
    prod_q88 = sat16(33'(prod >>> WIN_FRAC));
    sum_prod = sat16(33'(sum) + 33'(prod_q88));
    sum_bias = sat16(33'(sum) + 33'(bias));
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) sum <= '0;
    else if (x_valid)    sum <= sum_prod;
    else if (bias_add)   sum <= sum_bias;
  end

endmodule
