// tb_output_neuron -- self-checking test of one output neuron.
// After the zero-fill pass, alternates prediction passes (o compared with
// the reference sum of the active weights) and update passes (+lr as the
// target, -lr as the wrong prediction, clipped), with small clip bounds so
// that clipping is reached.
module tb_output_neuron;
  import splr_pkg::*;
  import splr_ref_pkg::clamp16;
  localparam int M = 13;
  logic  clk = 0, rst_n = 0, init = 0, addr_clr = 0, itp_clr = 0;
  logic  itp_run = 0, wu_run = 0, h_bit = 0, is_target = 0, is_pred = 0;
  word_t lr = 0, wmax = 0, o;
  int checks = 0, failures = 0, clips = 0;
  int Wm [M];
  bit hv [M];

  output_neuron #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass_itp();
    int exp;
    addr_clr <= 1; itp_clr <= 1;
    @(posedge clk);
    addr_clr <= 0; itp_clr <= 0; itp_run <= 1;
    for (int i = 0; i < M; i++) begin
      h_bit <= hv[i];
      @(posedge clk);
    end
    itp_run <= 0;
    #1;
    exp = 0;
    for (int i = 0; i < M; i++) if (hv[i]) exp = clamp16(longint'(exp) + longint'(Wm[i]));
    checks++;
    if (int'(o) != exp) begin
      failures++;
      $display("FAIL o=%0d exp=%0d", o, exp);
    end
  endtask

  task automatic pass_wu(bit tgt);
    addr_clr <= 1;
    @(posedge clk);
    addr_clr <= 0; wu_run <= 1; is_target <= tgt; is_pred <= !tgt;
    for (int i = 0; i < M; i++) begin
      h_bit <= hv[i];
      @(posedge clk);
    end
    wu_run <= 0; is_target <= 0; is_pred <= 0;
    @(posedge clk);
    for (int i = 0; i < M; i++)
      if (hv[i]) begin
        int v;
        v = clamp16(longint'(Wm[i]) + (tgt ? longint'(lr) : -longint'(lr)));
        if (v > int'(wmax)) begin v = int'(wmax); clips++; end
        else if (v < -int'(wmax)) begin v = -int'(wmax); clips++; end
        Wm[i] = v;
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    init <= 1;
    repeat (M) @(posedge clk);
    init <= 0;
    @(posedge clk);
    foreach (Wm[i]) Wm[i] = 0;
    foreach (hv[i]) hv[i] = 1;
    pass_itp();
    for (int r = 0; r < 80; r++) begin
      lr   <= word_t'($urandom_range(1, 40));
      wmax <= word_t'($urandom_range(60, 300));
      foreach (hv[i]) hv[i] = $urandom_range(0, 1);
      @(posedge clk);
      pass_wu($urandom_range(0, 2) != 0);
      foreach (hv[i]) hv[i] = $urandom_range(0, 1);
      pass_itp();
    end
    checks++;
    if (clips == 0) begin failures++; $display("FAIL clip never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
