// tb_argmax -- self-checking test of the MAX block: random outputs with
// many ties; the lowest index of the maximum must win.
module tb_argmax;
  import splr_pkg::*;
  localparam int C = 10;
  word_t o [C];
  logic [3:0] idx;
  word_t val;
  int checks = 0, failures = 0;

  argmax #(.C(C)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3000; k++) begin
      int best;
      for (int c = 0; c < C; c++)
        o[c] = (k % 2) ? word_t'($urandom_range(0, 4) - 2) : word_t'($urandom);
      #1;
      best = 0;
      for (int c = 1; c < C; c++) if (o[c] > o[best]) best = c;
      checks++;
      if (int'(idx) != best || val !== o[best]) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d idx=%0d exp=%0d", k, idx, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
