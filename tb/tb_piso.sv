// tb_piso -- self-checking test of the parallel-in serial-out register:
// random loads, random shift patterns, load-over-shift priority.
module tb_piso;
  localparam int N = 5, W = 3;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [N*W-1:0] din = 0, model;
  logic [W-1:0] dout;
  int checks = 0, failures = 0;

  piso #(.N(N), .W(W)) dut (.*);
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
    model = 0;
    for (int k = 0; k < 2000; k++) begin
      load  <= ($urandom_range(0, 5) == 0);
      shift <= ($urandom_range(0, 1) == 0);
      din   <= (N*W)'({$urandom, $urandom});
      @(posedge clk); #1;
      if (load) model = din;
      else if (shift) model = model >> W;
      checks++;
      if (dout !== model[W-1:0]) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d dout=%h exp=%h", k, dout, model[W-1:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
