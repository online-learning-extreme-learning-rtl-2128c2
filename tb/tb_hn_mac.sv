// tb_hn_mac -- self-checking test of the hidden-neuron MAC.
// Random pixels and weights (small and large, so that both saturation
// limits are reached), random bias cycles and clears; every cycle the sum is
// compared with a reference that computes (x*w)>>>15 and clamps each add to
// the signed 16-bit range.
module tb_hn_mac;
  import splr_pkg::*;
  logic  clk = 0, rst_n = 0, clear = 0, x_valid = 0, bias_add = 0;
  word_t x = 0, w = 0, bias = 0, sum;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;
  longint model;

  hn_mac dut (.*);
  always #5 clk = ~clk;

  function automatic longint clamp(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

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
    model = 0;
    for (int k = 0; k < 5000; k++) begin
      int r;
      r = $urandom_range(0, 99);
      clear    <= (r < 2);
      x_valid  <= (r >= 2 && r < 80);
      bias_add <= (r >= 80 && r < 90);
      x    <= (k % 1000 < 500) ? word_t'($urandom_range(0, 256)) : word_t'($urandom);
      w    <= word_t'($urandom);
      bias <= word_t'($urandom_range(0, 511)) - 16'sd256;
      @(posedge clk); #1;
      if (clear) model = 0;
      else if (x_valid) model = clamp(model + clamp((longint'(x) * longint'(w)) >>> 15));
      else if (bias_add) model = clamp(model + longint'(bias));
      if (model == 32767) sat_hi++;
      if (model == -32768) sat_lo++;
      checks++;
      if (longint'(sum) != model) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d sum=%0d exp=%0d", k, sum, model);
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin
      failures++;
      $display("FAIL saturation not exercised (%0d/%0d)", sat_hi, sat_lo);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
