// tb_hn_comp -- self-checking test of the activation comparator: random
// signed sums and thresholds, plus the equal and off-by-one cases.
module tb_hn_comp;
  import splr_pkg::*;
  word_t sum, thre;
  logic  h;
  int checks = 0, failures = 0;

  hn_comp dut (.*);

  task automatic t(int s, int th);
    sum = word_t'(s); thre = word_t'(th);
    #1;
    checks++;
    if (h !== (s > th)) begin
      failures++;
      $display("FAIL sum=%0d thre=%0d h=%0b", s, th, h);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t(0, 0); t(1, 0); t(-1, 0); t(100, 100); t(101, 100); t(-32768, 32767); t(32767, -32768);
    for (int k = 0; k < 2000; k++)
      t($urandom_range(0, 65535) - 32768, $urandom_range(0, 65535) - 32768);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
