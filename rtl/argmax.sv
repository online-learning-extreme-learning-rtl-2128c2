// argmax -- the MAX block: index and value of the largest of C outputs.
//
// Combinational linear scan over the C signed Q8.8 outputs; on a tie the
// lowest index wins (this design's choice). idx is the predicted class yhat,
// val the winning output value.
module argmax
  import splr_pkg::*;
#(
  parameter int unsigned C  = 10,
  localparam int unsigned IW = (C > 1) ? $clog2(C) : 1
) (
  input  word_t          o [C],
  output logic [IW-1:0]  idx,
  output word_t          val
);
  always_comb begin
    idx = '0;
    val = o[0];
    for (int c = 1; c < C; c++) begin
      if (o[c] > val) begin
        idx = IW'(c);
        val = o[c];
      end
    end
  end
endmodule
