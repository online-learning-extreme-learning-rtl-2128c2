// splr_pkg -- shared types, constants and arithmetic helpers of the SPLR-ELM
// accelerator (an extreme learning machine whose output layer learns online
// with a simplified predictive plasticity rule).
//
// All datapath words are signed 16-bit fixed point, Q8.8 (8 integer and 8
// fractional bits), as in the FXP16 format the design is built around. The
// random input weights are read as Q1.15, i.e. a value in [-1, 1).
//
// Contents:
//   * sat16()      -- clamp a wider signed value into the 16-bit range; every
//                     adder of the datapath saturates instead of wrapping.
//   * lfsr_next()  -- one step of the 16-bit Fibonacci LFSR of each hidden
//                     neuron. Feedback is the XOR of bits 12..15, shifted in at
//                     bit 0. This polynomial is not maximal-length: its
//                     non-zero states fall into cycles of 57337, 8191 and 7
//                     states, so hn_seed() steers clear of the 7-state cycle.
//   * hn_seed()    -- fixed per-neuron seed, a bijective hash of the neuron
//                     index, so every neuron gets its own weight sequence.
//                     The exact seeds are this design's own choice.
//   * hn_bias()    -- fixed per-neuron bias in [-1, 1) Q8.8, another hash of
//                     the index (the bias values are also this design's own).
//   * splr_cfg_t   -- run-time configuration: learning rate, weight clip
//                     bound and activation threshold.
package splr_pkg;

  localparam int unsigned DATA_W = 16;   // word width of x, weights, sums
  localparam int unsigned FRAC_W = 8;    // fractional bits of a Q8.8 word
  localparam int unsigned WIN_FRAC = 15; // fractional bits of a PRNG weight

  typedef logic signed [DATA_W-1:0] word_t;

  typedef struct packed {
    word_t lr;    // learning rate eta, Q8.8, added/subtracted by WU
    word_t wmax;  // clip bound w_max, Q8.8, weights stay in [-wmax, wmax]
    word_t thre;  // activation threshold THRE of the comparator, Q8.8
  } splr_cfg_t;

  // Clamp a 33-bit signed value to the signed 16-bit range.
  function automatic word_t sat16(input logic signed [32:0] v);
    if (v > 33'sd32767)       return 16'sh7FFF;
    else if (v < -33'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  function automatic logic [15:0] lfsr_next(input logic [15:0] s);
    return {s[14:0], s[15] ^ s[14] ^ s[13] ^ s[12]};
  endfunction

  // True if state s lies on the short 7-state cycle of the LFSR.
  function automatic bit lfsr_short_cycle(input logic [15:0] s);
    logic [15:0] t;
    t = s;
    for (int k = 0; k < 7; k++) t = lfsr_next(t);
    return t == s;
  endfunction

  // Integer mixing hash (multiply by an odd constant, fold the halves).
  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] z;
    z = v * 32'h9E3779B1;
    z = z ^ (z >> 15);
    z = z * 32'h85EBCA77;
    z = z ^ (z >> 13);
    return z;
  endfunction

  // Seed of hidden neuron idx: a bijective 16-bit mix of idx ^ base (odd
  // multiplies and xor-shifts are invertible), so neurons 0..65535 get
  // distinct seeds. The value 0 and the 7 states of the short LFSR cycle are
  // moved to other states; this can only collide for those 8 indices.
  function automatic logic [15:0] hn_seed(input int unsigned idx,
                                          input logic [15:0] base);
    logic [15:0] z;
    z = idx[15:0] ^ idx[31:16] ^ base;
    z = z * 16'h9E37;
    z = z ^ (z >> 7);
    z = z * 16'hA5A5;
    z = z ^ (z >> 8);
    if (z == 16'h0000 || lfsr_short_cycle(z)) z = ~z;
    if (z == 16'h0000 || lfsr_short_cycle(z)) z = 16'hACE1;
    return z;
  endfunction

  function automatic word_t hn_bias(input int unsigned idx);
    logic [31:0] z;
    z = mix32(idx ^ 32'h5A5A_0000);
    return word_t'($signed(z[31:16] ^ z[15:0]) >>> (WIN_FRAC - FRAC_W));
  endfunction

endpackage
