// hidden_layer -- the hidden layer (HL): M parallel hidden neurons, the h
// buffer and the h PISO.
//
// The pixel stream is broadcast to all M neurons. When the controller pulses
// h_latch (the cycle after bias_add) the M activations are captured in the
// h buffer and, in the same edge, loaded into the PISO. Each piso_shift then
// presents the next activation h_i on h_bit, i = 0..M-1, to the output layer.
// piso_reload reloads the PISO from the h buffer so that the same bits can be
// streamed a second time for the weight-update pass.
//
// Timing: h_bit for neuron i is valid in the i-th cycle after the load, as
// long as piso_shift is held high.
module hidden_layer
  import splr_pkg::*;
#(
  parameter int unsigned M         = 1700,
  parameter logic [15:0] SEED_BASE = 16'hACE1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         hl_clear,
  input  logic         x_valid,
  input  word_t        x,
  input  logic         bias_add,
  input  word_t        thre,
  input  logic         h_latch,
  input  logic         piso_reload,
  input  logic         piso_shift,
  output logic         h_bit,
  output logic [M-1:0] h_vec
);
  logic [M-1:0] h_now;

  for (genvar j = 0; j < M; j++) begin : g_hn
    hidden_neuron #(.IDX(j), .SEED_BASE(SEED_BASE)) u_hn (
      .clk, .rst_n, .hl_clear, .x_valid, .x, .bias_add, .thre, .h(h_now[j])
    );
  end

  // h buffer
  always_ff @(posedge clk) begin
    if (!rst_n)       h_vec <= '0;
    else if (h_latch) h_vec <= h_now;
  end

  piso #(.N(M), .W(1)) u_piso (
    .clk, .rst_n,
    .load (h_latch | piso_reload),
    .shift(piso_shift),
    .din  (h_latch ? h_now : h_vec),
    .dout (h_bit)
  );

  initial assert (M > 1) else $error("hidden_layer: M must be > 1");
endmodule
