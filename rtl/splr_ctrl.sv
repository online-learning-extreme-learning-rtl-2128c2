// splr_ctrl -- sequencer of the SPLR-ELM.
//
// After reset it runs an INIT pass of M cycles that writes zero to every
// output weight. Then, for each sample:
//   LOAD  D cycles   one pixel per accepted x_valid/x_ready beat; the first
//                    pixel may be accepted straight from IDLE and carries the
//                    sample's mode (train) and label;
//   BIAS  1 cycle    every hidden neuron adds its bias;
//   COMP  1 cycle    h is captured in the h buffer and the h PISO;
//   ITP   M cycles   o = h^T W, one hidden neuron per cycle;
//   MAX   1 cycle    o buffer and argmax registered; the h PISO is reloaded;
//   WU    M cycles   only for a misclassified training sample.
// done pulses in the cycle after MAX (inference or correct training sample)
// or after the last WU cycle. Counting the first pixel cycle as cycle 0,
// done is in cycle D + M + P (inference) or D + 2M + P (training with a
// mispredict) with P = 3 (BIAS, COMP, MAX): the latencies the paper gives.
// A new first pixel can be accepted in the cycle done is high. Pixels may
// pause (x_valid low); the mode/label capture and the handshake are this
// design's choices.
module splr_ctrl
  import splr_pkg::*;
#(
  parameter int unsigned D  = 784,
  parameter int unsigned M  = 1700,
  parameter int unsigned C  = 10,
  localparam int unsigned IW = (C > 1) ? $clog2(C) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          x_valid,
  output logic          x_ready,
  input  logic          x_train,
  input  logic [IW-1:0] x_label,
  input  logic          mispredict,
  // hidden layer
  output logic          hl_clear,
  output logic          x_fire,
  output logic          bias_add,
  output logic          h_latch,
  output logic          piso_reload,
  output logic          piso_shift,
  // output layer
  output logic          init,
  output logic          addr_clr,
  output logic          itp_clr,
  output logic          itp_run,
  output logic          wu_run,
  output logic          obuf_load,
  output logic          o_start,
  // sample state and result strobe
  output logic          train_q,
  output logic [IW-1:0] label_q,
  output logic          done,
  output logic          updated
);
  typedef enum logic [2:0] {
    S_INIT, S_IDLE, S_LOAD, S_BIAS, S_COMP, S_ITP, S_MAX, S_WU
  } state_t;

  localparam int unsigned CW = $clog2((D > M ? D : M) + 1);

  state_t        state;
  logic [CW-1:0] cnt;
  logic          need_wu;

  always_comb begin
    x_ready     = (state == S_IDLE) || (state == S_LOAD);
    x_fire      = x_ready && x_valid;
    hl_clear    = (state != S_LOAD) && (state != S_BIAS) && (state != S_COMP)
                  && !x_fire;
    bias_add    = (state == S_BIAS);
    h_latch     = (state == S_COMP);
    itp_clr     = (state == S_COMP);
    addr_clr    = (state == S_COMP) || (state == S_MAX);
    itp_run     = (state == S_ITP);
    wu_run      = (state == S_WU);
    piso_shift  = itp_run || wu_run;
    obuf_load   = (state == S_MAX);
    piso_reload = (state == S_MAX);
    init        = (state == S_INIT);
    need_wu     = train_q && mispredict;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_INIT;
      cnt     <= '0;
      train_q <= 1'b0;
      label_q <= '0;
      done    <= 1'b0;
      updated <= 1'b0;
      o_start <= 1'b0;
    end else begin
      done    <= 1'b0;
      o_start <= 1'b0;
      unique case (state)
        S_INIT: begin
          if (cnt == CW'(M - 1)) begin
            state <= S_IDLE;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        S_IDLE: begin
          if (x_fire) begin
            train_q <= x_train;
            label_q <= x_label;
            if (D == 1) state <= S_BIAS;
            else begin
              state <= S_LOAD;
              cnt   <= CW'(1);
            end
          end
        end
        S_LOAD: begin
          if (x_fire) begin
            if (cnt == CW'(D - 1)) begin
              state <= S_BIAS;
              cnt   <= '0;
            end else cnt <= cnt + 1'b1;
          end
        end
        S_BIAS: state <= S_COMP;
        S_COMP: begin
          state <= S_ITP;
          cnt   <= '0;
        end
        S_ITP: begin
          if (cnt == CW'(M - 1)) begin
            state <= S_MAX;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        S_MAX: begin
          if (need_wu) state <= S_WU;
          else begin
            state   <= S_IDLE;
            done    <= 1'b1;
            updated <= 1'b0;
            o_start <= !train_q;
          end
        end
        S_WU: begin
          if (cnt == CW'(M - 1)) begin
            state   <= S_IDLE;
            cnt     <= '0;
            done    <= 1'b1;
            updated <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A weight-update pass only ever follows a training sample.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_WU) |-> train_q)
    else $error("splr_ctrl: WU pass without a training sample");

endmodule
