// tb_splr_ctrl -- self-checking test of the sequencer. Checks the INIT pass
// length, that x_ready is high only while a sample can be taken, the number
// of cycles each strobe is high per sample, and that done arrives D+M+3
// cycles (no update) or D+2M+3 cycles (update) after the first pixel when
// pixels come back to back; also runs samples with gaps in the pixel stream.
module tb_splr_ctrl;
  localparam int D = 6, M = 5, C = 4, IW = 2;
  logic clk = 0, rst_n = 0, x_valid = 0, x_train = 0, mispredict = 0;
  logic [IW-1:0] x_label = 0;
  logic x_ready, hl_clear, x_fire, bias_add, h_latch, piso_reload, piso_shift;
  logic init, addr_clr, itp_clr, itp_run, wu_run, obuf_load, o_start;
  logic train_q, done, updated;
  logic [IW-1:0] label_q;
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_bias, n_latch, n_itp, n_wu, n_obuf, n_ostart, n_init = 0;

  splr_ctrl #(.D(D), .M(M), .C(C)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    n_bias += bias_add; n_latch += h_latch; n_itp += itp_run; n_wu += wu_run;
    n_obuf += obuf_load; n_ostart += o_start; n_init += (init && rst_n);
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sample(bit train, bit mis, bit gaps);
    int t0, lat;
    n_bias = 0; n_latch = 0; n_itp = 0; n_wu = 0; n_obuf = 0; n_ostart = 0;
    x_train <= train; x_label <= IW'($urandom_range(0, C - 1));
    mispredict <= mis;
    for (int k = 0; k < D; k++) begin
      if (gaps) while ($urandom_range(0, 2) == 0) begin
        x_valid <= 0;
        @(posedge clk);
      end
      x_valid <= 1;
      #1;
      chk(x_ready, "x_ready during input");
      if (k == 0) t0 = cyc;
      @(posedge clk);
    end
    x_valid <= 0;
    #1;
    chk(!x_ready, "x_ready low after D pixels");
    while (!done) begin
      @(posedge clk);
      #1;
    end
    lat = cyc - t0;
    if (!gaps)
      chk(lat == ((train && mis) ? D + 2*M + 3 : D + M + 3),
          $sformatf("latency %0d (train=%0b mis=%0b)", lat, train, mis));
    chk(updated == (train && mis), "updated flag");
    chk(label_q == x_label && train_q == train, "label/mode capture");
    chk(x_ready, "x_ready with done");
    @(posedge clk);
    #1;
    chk(n_bias == 1 && n_latch == 1 && n_itp == M && n_obuf == 1, "strobe counts");
    chk(n_wu == ((train && mis) ? M : 0), $sformatf("wu count %0d", n_wu));
    chk(n_ostart == (train ? 0 : 1), "o_start only in inference");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (M + 3) @(posedge clk);
    chk(n_init == M, $sformatf("init cycles %0d", n_init));
    for (int s = 0; s < 24; s++) sample(s % 2, (s % 4) >= 2, s >= 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
