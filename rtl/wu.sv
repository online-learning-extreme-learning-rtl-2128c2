// wu -- weight-update (WU) unit of one output neuron.
//
// Applies the SPLR rule Delta W(i,y) = +eta*h_i, Delta W(i,yhat) = -eta*h_i
// for a misclassified training sample. In each cycle of the update pass the
// neuron's address counter reads word i; this unit adds (add = this neuron is
// the target class y) or subtracts (sub = this neuron is the wrong
// prediction yhat) the learning rate lr, clips the result to [-wmax, wmax]
// and registers the write address and data, so word i is written back in
// the next cycle. Words whose h_i is 0 are not written. init forces a write
// of zero to the current address (used to clear the memory after reset).
//
// Timing: one read-modify-write per cycle; we/waddr/wdata are registered,
// one cycle behind addr/rdata.
module wu
  import splr_pkg::*;
#(
  parameter int unsigned AW = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          init,
  input  logic          add,
  input  logic          sub,
  input  logic          h_bit,
  input  logic [AW-1:0] addr,
  input  word_t         rdata,
  input  word_t         lr,
  input  word_t         wmax,
  output logic          we,
  output logic [AW-1:0] waddr,
  output word_t         wdata
);
  word_t upd, clipped;
  logic  do_write;

  always_comb begin
    upd = add ? sat16(33'(rdata) + 33'(lr)) : sat16(33'(rdata) - 33'(lr));
    if (upd > wmax)       clipped = wmax;
    else if (upd < -wmax) clipped = -wmax;
    else                  clipped = upd;
    do_write = init | (en & h_bit & (add ^ sub));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      we    <= 1'b0;
      waddr <= '0;
      wdata <= '0;
    end else begin
      we    <= do_write;
      waddr <= addr;
      wdata <= init ? '0 : clipped;
    end
  end
endmodule
