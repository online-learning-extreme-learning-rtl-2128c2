// tb_hidden_neuron -- self-checking test of one hidden neuron.
// Streams samples of D pixels (with random gaps) the way the controller
// does -- hl_clear while idle, one bias cycle, then h is read -- and
// compares h with the reference model for several thresholds. A repeated
// sample checks that reseeding regenerates the same weights.
module tb_hidden_neuron;
  import splr_pkg::*;
  import splr_ref_pkg::*;
  localparam int D = 40;
  localparam int IDX = 7;
  logic  clk = 0, rst_n = 0, hl_clear = 1, x_valid = 0, bias_add = 0;
  word_t x = 0, thre = 0;
  logic  h;
  int checks = 0, failures = 0, ones = 0, zeros = 0;

  hidden_neuron #(.IDX(IDX), .SEED_BASE(16'hACE1)) dut (.*);
  always #5 clk = ~clk;

  // Reference for neuron IDX alone: a model whose neuron 0..IDX exist,
  // look at element IDX.
  splr_model mdl;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xs[];
    bit hm[];
    mdl = new(D, IDX + 1, 2, 16'hACE1);
    xs = new[D];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < 60; s++) begin
      if (s % 2 == 0 || s < 2)
        foreach (xs[k]) xs[k] = (s % 6 == 4) ? $urandom_range(0, 8000) : $urandom_range(0, 256);
      thre <= word_t'($urandom_range(0, 200) - 100);
      @(posedge clk);
      hl_clear <= 0;
      for (int k = 0; k < D; k++) begin
        while ($urandom_range(0, 3) == 0) begin
          x_valid <= 0;
          @(posedge clk);
        end
        x_valid <= 1;
        x <= word_t'(xs[k]);
        @(posedge clk);
      end
      x_valid <= 0;
      bias_add <= 1;
      @(posedge clk);
      bias_add <= 0;
      @(posedge clk);
      #1;
      mdl.hidden(xs, int'(thre), hm);
      checks++;
      if (h !== hm[IDX]) begin
        failures++;
        $display("FAIL sample %0d h=%0b exp=%0b", s, h, hm[IDX]);
      end
      if (h) ones++; else zeros++;
      hl_clear <= 1;
      @(posedge clk);
    end
    checks++;
    if (ones == 0 || zeros == 0) begin
      failures++;
      $display("FAIL h never toggled (%0d ones, %0d zeros)", ones, zeros);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
