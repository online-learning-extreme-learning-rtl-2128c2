// tb_splr_lfsr -- self-checking test of the hidden-neuron PRNG.
// Compares 3000 steps against an independently written LFSR recurrence
// (feedback = XOR of bits 12..15 into bit 0), checks that the state holds
// without step, that reseed restores the seed, and that step wins over
// reseed in the same cycle. Also checks the seeds of a 1700-neuron layer
// (non-zero, not on the short LFSR cycle, all distinct).
module tb_splr_lfsr;
  localparam logic [15:0] SEED = 16'h1D2B;
  logic clk = 0, rst_n = 0, reseed = 0, step = 0;
  logic [15:0] state, model;
  int checks = 0, failures = 0;

  splr_lfsr #(.SEED(SEED)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [15:0] ref_next(logic [15:0] s);
    logic fb;
    fb = ^(s & 16'hF000);
    return (s << 1) | 16'(fb);
  endfunction

  task automatic chk(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

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
    @(posedge clk); #1;
    chk("reset", state, SEED);
    model = SEED;
    for (int k = 0; k < 3000; k++) begin
      step <= ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (step) model = ref_next(model);
      chk("step", state, model);
    end
    step <= 0; reseed <= 1;
    @(posedge clk); #1;
    chk("reseed", state, SEED);
    step <= 1; reseed <= 1;
    @(posedge clk); #1;
    chk("step over reseed", state, ref_next(SEED));
    step <= 0; reseed <= 0;
    repeat (3) @(posedge clk); #1;
    chk("hold", state, ref_next(SEED));
    // the per-neuron seeds of a 1700-neuron layer: non-zero, off the
    // 7-state cycle, and all distinct
    begin
      bit used [logic [15:0]];
      for (int j = 0; j < 1700; j++) begin
        logic [15:0] s, t;
        s = splr_pkg::hn_seed(j, 16'hACE1);
        t = s;
        for (int k = 0; k < 7; k++) t = ref_next(t);
        checks++;
        if (s == 0 || t == s || used.exists(s)) begin
          failures++;
          if (failures < 10) $display("FAIL seed of neuron %0d: %h", j, s);
        end
        used[s] = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
