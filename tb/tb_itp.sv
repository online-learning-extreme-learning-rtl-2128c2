// tb_itp -- self-checking test of the ITP accumulator: random h bits and
// weights, random clears and idle cycles, large weights so that both
// saturation limits are reached.
module tb_itp;
  import splr_pkg::*;
  import splr_ref_pkg::clamp16;
  logic  clk = 0, rst_n = 0, clear = 0, en = 0, h_bit = 0;
  word_t w = 0, o;
  int checks = 0, failures = 0, model = 0, sat = 0;

  itp dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 4000; k++) begin
      clear <= ($urandom_range(0, 60) == 0);
      en    <= ($urandom_range(0, 4) != 0);
      h_bit <= $urandom_range(0, 1);
      w     <= (k % 800 < 400) ? word_t'($urandom_range(0, 512) - 256) : word_t'($urandom);
      @(posedge clk); #1;
      if (clear) model = 0;
      else if (en && h_bit) model = clamp16(longint'(model) + longint'(w));
      if (model == 32767 || model == -32768) sat++;
      checks++;
      if (int'(o) != model) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d o=%0d exp=%0d", k, o, model);
      end
    end
    checks++;
    if (sat == 0) begin failures++; $display("FAIL no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
