// splr_lfsr -- pseudo-random weight generator (PRNG) of one hidden neuron.
//
// A 16-bit Fibonacci linear feedback shift register: each step shifts the
// register one place toward bit 15 and feeds bit 0 with the XOR of bits
// 12, 13, 14 and 15 (splr_pkg::lfsr_next). The current state is the weight
// word for the pixel on the input in the same cycle, so no input weight matrix
// is stored: the weights are regenerated for every sample.
//
// Interface / timing:
//   step   -- advance one state at the clock edge (one pixel consumed).
//   reseed -- load SEED at the clock edge when not stepping. The controller
//             holds reseed while the neuron is idle, so every sample starts
//             from the same seed and the first pixel uses the seed word.
//   state  -- registered current state (the weight, read as signed Q1.15).
// The LFSR structure and the per-sample reseeding follow the paper; the tap
// set is read from its PRNG drawing, and the seed value is this design's own.
module splr_lfsr #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reseed,
  input  logic        step,
  output logic [15:0] state
);
  import splr_pkg::*;

  always_ff @(posedge clk) begin
    if (!rst_n)      state <= SEED;
    else if (step)   state <= lfsr_next(state);
    else if (reseed) state <= SEED;
  end

  initial assert (SEED != 16'h0000) else $error("LFSR seed must be non-zero");

endmodule
