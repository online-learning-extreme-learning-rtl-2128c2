// tb_wu -- self-checking test of the weight-update unit: random read data,
// learning rates, clip bounds and add/sub/h combinations; the registered
// write strobe, address and data are compared one cycle later with the
// rule W +/- lr clipped to [-wmax, wmax], and init forcing a zero write.
module tb_wu;
  import splr_pkg::*;
  import splr_ref_pkg::clamp16;
  localparam int AW = 6;
  logic  clk = 0, rst_n = 0, en = 0, init = 0, add = 0, sub = 0, h_bit = 0;
  logic [AW-1:0] addr = 0, waddr;
  word_t rdata = 0, lr = 0, wmax = 0, wdata;
  logic  we;
  int checks = 0, failures = 0, clips = 0;

  wu #(.AW(AW)) dut (.*);
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
      bit exp_we;
      int exp_d, v;
      en    <= ($urandom_range(0, 3) != 0);
      init  <= ($urandom_range(0, 20) == 0);
      add   <= $urandom_range(0, 1);
      sub   <= $urandom_range(0, 1);
      h_bit <= $urandom_range(0, 1);
      addr  <= AW'($urandom);
      rdata <= word_t'($urandom_range(0, 2000) - 1000);
      lr    <= word_t'($urandom_range(1, 64));
      wmax  <= word_t'($urandom_range(100, 900));
      @(posedge clk); #1;
      exp_we = init || (en && h_bit && (add != sub));
      v = add ? clamp16(longint'(rdata) + longint'(lr)) : clamp16(longint'(rdata) - longint'(lr));
      if (v > int'(wmax)) v = int'(wmax);
      else if (v < -int'(wmax)) v = -int'(wmax);
      exp_d = init ? 0 : v;
      checks++;
      if (we !== exp_we || (exp_we && (waddr !== addr || int'(wdata) != exp_d))) begin
        failures++;
        if (failures < 10)
          $display("FAIL k=%0d we=%0b/%0b addr=%0d/%0d data=%0d/%0d", k, we, exp_we, waddr, addr, wdata, exp_d);
      end
      if (exp_we && !init && (int'(rdata) + (add ? int'(lr) : -int'(lr))) != exp_d) clips++;
    end
    checks++;
    if (clips == 0) begin failures++; $display("FAIL clipping never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
