// output_layer -- the output layer (OL): C output neurons, the o buffer, the
// MAX block and the o PISO.
//
// All C neurons see the same serial h_i and step their address counters in
// lock step. At the end of the prediction pass (obuf_load, one cycle after
// the last ITP term) the C sums are captured in the o buffer and the argmax
// of the same sums is registered as pred / pred_val. max_idx is that argmax
// before the register, so the controller can decide in the same cycle
// whether a weight update is needed. During the update pass the neuron whose
// index equals label adds the learning rate and the neuron whose index
// equals pred subtracts it.
//
// In inference the controller pulses o_start; the o buffer is then loaded
// into the PISO and the C outputs leave on o_data, one per cycle for C
// cycles, with o_valid and o_index. This mode switch (training: weights are
// updated, nothing is streamed; inference: o is streamed) follows the paper.
module output_layer
  import splr_pkg::*;
#(
  parameter int unsigned M  = 1700,
  parameter int unsigned C  = 10,
  localparam int unsigned IW = (C > 1) ? $clog2(C) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          addr_clr,
  input  logic          itp_clr,
  input  logic          itp_run,
  input  logic          wu_run,
  input  logic          h_bit,
  input  logic [IW-1:0] label,
  input  word_t         lr,
  input  word_t         wmax,
  input  logic          obuf_load,
  input  logic          o_start,
  output logic [IW-1:0] max_idx,
  output logic [IW-1:0] pred,
  output word_t         pred_val,
  output word_t         o_buf [C],
  output logic          o_valid,
  output word_t         o_data,
  output logic [IW-1:0] o_index
);
  word_t          o_now [C];
  word_t          max_val;
  logic [C*16-1:0] o_flat;

  for (genvar c = 0; c < C; c++) begin : g_on
    output_neuron #(.M(M)) u_on (
      .clk, .rst_n, .init, .addr_clr, .itp_clr, .itp_run, .wu_run, .h_bit,
      .is_target(label == IW'(c)),
      .is_pred  (pred  == IW'(c)),
      .lr, .wmax, .o(o_now[c])
    );
    assign o_flat[c*16 +: 16] = o_buf[c];
  end

  argmax #(.C(C)) u_max (.o(o_now), .idx(max_idx), .val(max_val));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pred     <= '0;
      pred_val <= '0;
      for (int c = 0; c < C; c++) o_buf[c] <= '0;
    end else if (obuf_load) begin
      pred     <= max_idx;
      pred_val <= max_val;
      o_buf    <= o_now;
    end
  end

  // o PISO and its element counter
  logic [IW:0] o_left;

  piso #(.N(C), .W(16)) u_piso (
    .clk, .rst_n, .load(o_start), .shift(o_valid), .din(o_flat), .dout(o_data)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      o_left  <= '0;
      o_index <= '0;
    end else if (o_start) begin
      o_left  <= (IW+1)'(C);
      o_index <= '0;
    end else if (o_valid) begin
      o_left  <= o_left - 1'b1;
      o_index <= o_index + 1'b1;
    end
  end

  assign o_valid = (o_left != '0);

  // An update pass only follows a misprediction, so no neuron is ever both
  // the target and the wrong prediction while weights are written.
  assert property (@(posedge clk) disable iff (!rst_n) wu_run |-> (label != pred))
    else $error("output_layer: update pass with label == prediction");
endmodule
