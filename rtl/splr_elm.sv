// splr_elm -- top level of the SPLR-ELM online-learning accelerator.
//
// An extreme learning machine with D inputs, M binary hidden neurons and C
// outputs. The input-to-hidden weights are never stored: every hidden neuron
// regenerates them from its own reseeded LFSR while the D pixels of a sample
// stream in, one 16-bit Q8.8 pixel per cycle. Each hidden neuron fires
// (h_j = 1) when its biased weighted sum exceeds the threshold. The M bits are
// then shifted serially into the C output neurons, which sum the weights of
// the active hidden neurons (o = h^T W, adds only) and an argmax picks the
// class. For a training sample whose prediction yhat differs from the label
// y, a second serial pass adds the learning rate to W(i, y) and subtracts it
// from W(i, yhat) for every active hidden neuron i, clipping to +/-wmax.
//
// Interface:
//   x_valid/x_ready/x_data  pixel stream; x_train and x_label are sampled
//                           with the first pixel of a sample.
//   cfg                     learning rate, clip bound, threshold (Q8.8).
//   res_valid               one-cycle strobe: res_pred (yhat), res_val (its
//                           output value) and res_updated (weights changed);
//                           res_o holds all C outputs of the last sample.
//   o_valid/o_data/o_index  after an inference sample, the C outputs o, one
//                           per cycle.
//   busy_init               high during the zero-fill pass after reset.
// Timing: res_valid comes D+M+3 cycles after the first pixel (inference or a
// correct training sample) or D+2M+3 cycles (training with an update),
// if pixels arrive back to back.
module splr_elm
  import splr_pkg::*;
#(
  parameter int unsigned D         = 784,
  parameter int unsigned M         = 1700,
  parameter int unsigned C         = 10,
  parameter logic [15:0] SEED_BASE = 16'hACE1,
  localparam int unsigned IW       = (C > 1) ? $clog2(C) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  splr_cfg_t     cfg,
  input  logic          x_valid,
  output logic          x_ready,
  input  word_t         x_data,
  input  logic          x_train,
  input  logic [IW-1:0] x_label,
  output logic          busy_init,
  output logic          res_valid,
  output logic [IW-1:0] res_pred,
  output word_t         res_val,
  output word_t         res_o [C],
  output logic          res_updated,
  output logic          o_valid,
  output word_t         o_data,
  output logic [IW-1:0] o_index
);
  logic          hl_clear, x_fire, bias_add, h_latch, piso_reload, piso_shift;
  logic          init, addr_clr, itp_clr, itp_run, wu_run, obuf_load, o_start;
  logic [IW-1:0] label_q, max_idx;
  logic          h_bit;

  splr_ctrl #(.D(D), .M(M), .C(C)) u_ctrl (
    .clk, .rst_n, .x_valid, .x_ready, .x_train, .x_label,
    .mispredict(max_idx != label_q),
    .hl_clear, .x_fire, .bias_add, .h_latch, .piso_reload, .piso_shift,
    .init, .addr_clr, .itp_clr, .itp_run, .wu_run, .obuf_load, .o_start,
    .train_q(), .label_q, .done(res_valid), .updated(res_updated)
  );

  hidden_layer #(.M(M), .SEED_BASE(SEED_BASE)) u_hl (
    .clk, .rst_n, .hl_clear, .x_valid(x_fire), .x(x_data), .bias_add,
    .thre(cfg.thre), .h_latch, .piso_reload, .piso_shift, .h_bit, .h_vec()
  );

  output_layer #(.M(M), .C(C)) u_ol (
    .clk, .rst_n, .init, .addr_clr, .itp_clr, .itp_run, .wu_run, .h_bit,
    .label(label_q), .lr(cfg.lr), .wmax(cfg.wmax), .obuf_load, .o_start,
    .max_idx, .pred(res_pred), .pred_val(res_val), .o_buf(res_o),
    .o_valid, .o_data, .o_index
  );

  assign busy_init = init;
endmodule
