// hn_comp -- binary activation comparator (COM) of one hidden neuron.
//
// Implements the Heaviside step h = Theta(sum - THRE): h is 1 when the
// biased MAC sum is strictly greater than the threshold, both read as signed
// Q8.8. Purely combinational; the result is captured by the h buffer and the
// PISO of the hidden layer. The strict '>' follows the paper's drawing; the
// threshold value is supplied at run time.
module hn_comp
  import splr_pkg::*;
(
  input  word_t sum,
  input  word_t thre,
  output logic  h
);
  assign h = (sum > thre);
endmodule
