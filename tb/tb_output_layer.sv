// tb_output_layer -- self-checking test of the output layer (C neurons,
// o buffer, MAX, o PISO). Runs prediction passes on random h, checks the
// o buffer, pred and pred_val against the reference, applies updates for a
// random label when the prediction is wrong, and checks the serial o stream
// (values, indices, C beats).
module tb_output_layer;
  import splr_pkg::*;
  import splr_ref_pkg::*;
  localparam int M = 16, C = 4, IW = 2;
  logic  clk = 0, rst_n = 0, init = 0, addr_clr = 0, itp_clr = 0;
  logic  itp_run = 0, wu_run = 0, h_bit = 0, obuf_load = 0, o_start = 0;
  logic [IW-1:0] label = 0, max_idx, pred, o_index;
  word_t lr = 16'sd24, wmax = 16'sd200, pred_val, o_data;
  word_t o_buf [C];
  logic  o_valid;
  int checks = 0, failures = 0, updates = 0;

  output_layer #(.M(M), .C(C)) dut (.*);
  always #5 clk = ~clk;

  splr_model mdl;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h[];
    int o[], p, y;
    mdl = new(1, M, C, 16'h0);
    h = new[M];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    init <= 1;
    repeat (M) @(posedge clk);
    init <= 0;
    @(posedge clk);
    for (int s = 0; s < 60; s++) begin
      foreach (h[i]) h[i] = $urandom_range(0, 1);
      y = $urandom_range(0, C - 1);
      label <= IW'(y);
      addr_clr <= 1; itp_clr <= 1;
      @(posedge clk);
      addr_clr <= 0; itp_clr <= 0; itp_run <= 1;
      for (int i = 0; i < M; i++) begin
        h_bit <= h[i];
        @(posedge clk);
      end
      itp_run <= 0; obuf_load <= 1; addr_clr <= 1;
      @(posedge clk);
      obuf_load <= 0; addr_clr <= 0;
      #1;
      mdl.predict(h, o, p);
      for (int c = 0; c < C; c++) chk(int'(o_buf[c]) == o[c], $sformatf("o_buf[%0d]=%0d exp %0d", c, o_buf[c], o[c]));
      chk(int'(pred) == p, $sformatf("pred=%0d exp %0d", pred, p));
      chk(int'(pred_val) == o[p], "pred_val");
      if (s % 3 == 2) begin
        // inference: stream o out
        o_start <= 1;
        @(posedge clk);
        o_start <= 0;
        for (int c = 0; c < C; c++) begin
          #1;
          chk(o_valid && int'(o_index) == c && int'(o_data) == o[c],
              $sformatf("o stream beat %0d valid=%0b idx=%0d data=%0d", c, o_valid, o_index, o_data));
          @(posedge clk);
        end
        #1;
        chk(!o_valid, "o_valid after C beats");
      end else if (p != y) begin
        updates++;
        wu_run <= 1;
        for (int i = 0; i < M; i++) begin
          h_bit <= h[i];
          @(posedge clk);
        end
        wu_run <= 0;
        @(posedge clk);
        mdl.train(h, y, p, int'(lr), int'(wmax));
      end
    end
    chk(updates > 0, "no update happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
