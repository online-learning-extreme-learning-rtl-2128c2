// output_neuron -- one output-layer neuron (ON) of the SPLR-ELM.
//
// Holds the neuron's M weights (weight_bram), an address counter, the ITP
// accumulator and the WU read-modify-write unit. The counter steps through
// addresses 0..M-1 in three kinds of pass, all fed by the controller:
//   init    -- write zero to every word (after reset);
//   itp_run -- read word i, add it to o when h_i = 1 (prediction);
//   wu_run  -- read word i, write back W +/- lr, clipped, when h_i = 1 and
//              this neuron is the target (is_target) or the wrong
//              prediction (is_pred).
// addr_clr returns the counter to 0 and itp_clr zeroes o before a pass.
// The +lr / -lr / no-change selection stands in for the per-neuron
// multiplexer of the paper's drawing (what that multiplexer switches is this
// design's reading).
module output_neuron
  import splr_pkg::*;
#(
  parameter int unsigned M  = 1700,
  localparam int unsigned AW = (M > 1) ? $clog2(M) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  init,
  input  logic  addr_clr,
  input  logic  itp_clr,
  input  logic  itp_run,
  input  logic  wu_run,
  input  logic  h_bit,
  input  logic  is_target,
  input  logic  is_pred,
  input  word_t lr,
  input  word_t wmax,
  output word_t o
);
  logic [AW-1:0] addr, waddr;
  logic          we;
  word_t         rdata, wdata;

  always_ff @(posedge clk) begin
    if (!rst_n || addr_clr)              addr <= '0;
    else if (init || itp_run || wu_run) addr <= addr + 1'b1;
  end

  weight_bram #(.DEPTH(M), .W(DATA_W)) u_bram (
    .clk, .we, .waddr, .wdata(wdata), .raddr(addr), .rdata(rdata)
  );

  itp u_itp (
    .clk, .rst_n, .clear(itp_clr), .en(itp_run), .h_bit, .w(rdata), .o
  );

  wu #(.AW(AW)) u_wu (
    .clk, .rst_n, .en(wu_run), .init, .add(is_target), .sub(is_pred), .h_bit,
    .addr, .rdata, .lr, .wmax, .we, .waddr, .wdata
  );
endmodule
