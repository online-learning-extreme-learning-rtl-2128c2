// tb_hidden_layer -- self-checking test of the hidden layer: M neurons, h
// buffer and PISO. For each sample the h buffer is compared with the
// reference model, and the serial stream is read twice (after h_latch and
// after piso_reload) and compared bit by bit.
module tb_hidden_layer;
  import splr_pkg::*;
  import splr_ref_pkg::*;
  localparam int D = 24, M = 12;
  logic  clk = 0, rst_n = 0, hl_clear = 1, x_valid = 0, bias_add = 0;
  logic  h_latch = 0, piso_reload = 0, piso_shift = 0;
  word_t x = 0, thre = 0;
  logic  h_bit;
  logic [M-1:0] h_vec;
  int checks = 0, failures = 0;

  hidden_layer #(.M(M), .SEED_BASE(16'h1234)) dut (.*);
  always #5 clk = ~clk;

  splr_model mdl;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic stream(bit hm[], string tag);
    piso_shift <= 1;
    for (int i = 0; i < M; i++) begin
      #1;
      checks++;
      if (h_bit !== hm[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s bit %0d got %0b exp %0b", tag, i, h_bit, hm[i]);
      end
      @(posedge clk);
    end
    piso_shift <= 0;
  endtask

  initial begin
    int xs[];
    bit hm[];
    mdl = new(D, M, 2, 16'h1234);
    xs = new[D];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < 20; s++) begin
      foreach (xs[k]) xs[k] = $urandom_range(0, 256);
      thre <= word_t'($urandom_range(0, 100) - 50);
      @(posedge clk);
      hl_clear <= 0;
      for (int k = 0; k < D; k++) begin
        x_valid <= 1;
        x <= word_t'(xs[k]);
        @(posedge clk);
      end
      x_valid <= 0;
      bias_add <= 1;
      @(posedge clk);
      bias_add <= 0;
      h_latch <= 1;
      @(posedge clk);
      h_latch <= 0;
      hl_clear <= 1;
      mdl.hidden(xs, int'(thre), hm);
      #1;
      for (int i = 0; i < M; i++) begin
        checks++;
        if (h_vec[i] !== hm[i]) begin
          failures++;
          if (failures < 10) $display("FAIL h_vec[%0d]", i);
        end
      end
      stream(hm, "first");
      piso_reload <= 1;
      @(posedge clk);
      piso_reload <= 0;
      stream(hm, "second");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
