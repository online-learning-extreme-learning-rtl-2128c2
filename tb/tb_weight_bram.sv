// tb_weight_bram -- self-checking test of the weight memory: fills every
// word, then random writes and same-cycle reads against a shadow array,
// including a read of the word being written (old data until the edge).
module tb_weight_bram;
  localparam int DEPTH = 37, W = 16, AW = $clog2(DEPTH);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  weight_bram #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      we <= 1; waddr <= AW'(i); wdata <= W'($urandom);
      @(posedge clk);
      shadow[i] = wdata;
    end
    we <= 0;
    for (int k = 0; k < 3000; k++) begin
      we    <= $urandom_range(0, 1);
      waddr <= AW'($urandom_range(0, DEPTH - 1));
      raddr <= AW'($urandom_range(0, DEPTH - 1));
      wdata <= W'($urandom);
      #1;
      checks++;
      if (rdata !== shadow[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d got %h exp %h", raddr, rdata, shadow[raddr]);
      end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
