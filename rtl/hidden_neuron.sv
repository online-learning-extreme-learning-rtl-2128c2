// hidden_neuron -- one hidden-layer neuron (HN) of the SPLR-ELM.
//
// Holds a PRNG (splr_lfsr), a fixed bias (BIAS), a MAC (hn_mac) and a
// comparator (hn_comp). Pixels arrive one per cycle on x/x_valid, shared by
// all M neurons; each neuron multiplies them by its own regenerated random
// weight, adds its bias and compares with the threshold.
//
// Timing: pixel k (k = 0..D-1) is multiplied by LFSR state k. One cycle after
// the last pixel the controller pulses bias_add; one cycle later h is valid
// (combinational from the registered sum) and is captured by the layer.
// hl_clear, held while the neuron is idle, zeroes the sum and reseeds the
// LFSR. The seed and bias of neuron IDX are splr_pkg::hn_seed/hn_bias of the
// index -- the paper fixes seeds and biases but does not give their values.
module hidden_neuron
  import splr_pkg::*;
#(
  parameter int unsigned IDX       = 0,
  parameter logic [15:0] SEED_BASE = 16'hACE1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  hl_clear,
  input  logic  x_valid,
  input  word_t x,
  input  logic  bias_add,
  input  word_t thre,
  output logic  h
);
  localparam logic [15:0] SEED = hn_seed(IDX, SEED_BASE);
  localparam word_t       BIAS = hn_bias(IDX);

  logic [15:0] w;
  word_t       sum;

  splr_lfsr #(.SEED(SEED)) u_prng (
    .clk, .rst_n, .reseed(hl_clear), .step(x_valid), .state(w)
  );

  hn_mac u_mac (
    .clk, .rst_n, .clear(hl_clear), .x_valid, .x, .w(word_t'(w)),
    .bias_add, .bias(BIAS), .sum
  );

  hn_comp u_comp (.sum, .thre, .h);

endmodule
