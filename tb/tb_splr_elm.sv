// tb_splr_elm -- end-to-end test of the SPLR-ELM at reduced size
// (D = 16 pixels, M = 24 hidden neurons, C = 4 classes).
//
// Trains on noisy copies of four class prototypes for several epochs,
// interleaved with inference samples, and compares every result (predicted
// class, its value, all C outputs, the update flag, the serial o stream)
// with the reference model, which also tracks the output weights. Latency is
// checked for samples sent back to back: D+M+3 cycles without an update and
// D+2M+3 with one. The test counts how often each mechanism occurred and
// fails if one never did: weight update on a mispredict, a correct training
// sample with no update, inference with the o stream, weight clipping at
// +/-wmax, hidden-sum saturation, a stalled pixel stream, and a first pixel
// accepted in the same cycle as the previous result.
module tb_splr_elm;
  import splr_pkg::*;
  import splr_ref_pkg::*;
  localparam int D = 16, M = 24, C = 4, IW = 2;
  localparam int NSAMP = 90;
  logic      clk = 0, rst_n = 0;
  splr_cfg_t cfg;
  logic      x_valid = 0, x_ready, x_train = 0;
  word_t     x_data = 0;
  logic [IW-1:0] x_label = 0, res_pred, o_index;
  logic      busy_init, res_valid, res_updated, o_valid;
  word_t     res_val, o_data;
  word_t     res_o [C];
  int checks = 0, failures = 0, cyc = 0;
  int n_update = 0, n_correct_train = 0, n_infer = 0, n_stall = 0, n_b2b = 0;

  splr_elm #(.D(D), .M(M), .C(C)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // serial o stream capture
  int o_seen [$];
  int o_idx_seen [$];
  always @(posedge clk) if (o_valid) begin
    o_seen.push_back(int'(o_data));
    o_idx_seen.push_back(int'(o_index));
  end

  splr_model mdl;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (NSAMP * (D + 2 * M + 20) + 4 * M + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int proto [C][];
    int xs[];
    bit h[];
    int o[], p, y, t0, lat, expected_lat, rcyc;
    bit train, gaps, b2b;

    cfg.lr   = 16'sd32;    // 0.125
    cfg.wmax = 16'sd48;    // 0.1875
    cfg.thre = 16'sd0;
    mdl = new(D, M, C, 16'hACE1);
    xs = new[D];
    for (int c = 0; c < C; c++) begin
      proto[c] = new[D];
      foreach (proto[c][k]) proto[c][k] = $urandom_range(0, 256);
    end

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    while (busy_init) begin @(posedge clk); #1; end
    b2b = 0;

    for (int s = 0; s < NSAMP; s++) begin
      // sample choice: mostly training, every 5th an inference sample;
      // every 9th sample uses large pixels to drive the hidden sums into
      // saturation; samples NSAMP/3 .. NSAMP/2-1 have a stalling pixel stream.
      y = $urandom_range(0, C - 1);
      train = (s % 5 != 4);
      gaps = (s >= NSAMP / 3 && s < NSAMP / 2);
      foreach (xs[k]) begin
        xs[k] = proto[y][k] + $urandom_range(0, 40) - 20;
        if (xs[k] < 0) xs[k] = 0;
        if (s % 9 == 8) xs[k] = xs[k] * 100;
      end
      if (s % 7 == 6) y = (y + 1) % C;  // occasional label noise
      mdl.hidden(xs, int'(cfg.thre), h);
      mdl.predict(h, o, p);
      x_train <= train;
      x_label <= IW'(y);
      o_seen.delete();
      o_idx_seen.delete();
      // pixel stream (x_ready is combinational: sample it after the edge)
      for (int k = 0; k < D; k++) begin
        if (gaps && k > 0 && $urandom_range(0, 2) == 0) begin
          x_valid <= 0;
          n_stall++;
          repeat ($urandom_range(1, 3)) @(posedge clk);
          #1;
        end
        x_valid <= 1;
        x_data <= word_t'(xs[k]);
        #1;
        while (!x_ready) begin @(posedge clk); #1; end
        if (k == 0) begin
          t0 = cyc;
          if (b2b) n_b2b++;
        end
        @(posedge clk);
      end
      x_valid <= 0;
      #1;
      while (!res_valid) begin @(posedge clk); #1; end
      rcyc = cyc;
      lat = rcyc - t0;
      expected_lat = (train && p != y) ? D + 2 * M + 3 : D + M + 3;
      if (!gaps) chk(lat == expected_lat, $sformatf("sample %0d latency %0d exp %0d", s, lat, expected_lat));
      chk(int'(res_pred) == p, $sformatf("sample %0d pred %0d exp %0d", s, res_pred, p));
      chk(int'(res_val) == o[p], $sformatf("sample %0d value %0d exp %0d", s, res_val, o[p]));
      for (int c = 0; c < C; c++)
        chk(int'(res_o[c]) == o[c], $sformatf("sample %0d o[%0d]=%0d exp %0d", s, c, res_o[c], o[c]));
      chk(res_updated == (train && p != y), $sformatf("sample %0d updated flag", s));
      if (train) begin
        if (p != y) n_update++; else n_correct_train++;
        mdl.train(h, y, p, int'(cfg.lr), int'(cfg.wmax));
      end else begin
        n_infer++;
        // o stream: C beats following the result strobe
        repeat (C + 1) @(posedge clk);
        #1;
        chk(o_seen.size() == C, $sformatf("sample %0d o beats %0d", s, o_seen.size()));
        for (int c = 0; c < C && c < o_seen.size(); c++)
          chk(o_seen[c] == o[c] && o_idx_seen[c] == c, $sformatf("sample %0d o beat %0d", s, c));
      end
      // alternate back-to-back starts (first pixel in the result cycle)
      // with idle gaps between samples
      b2b = train && (s % 2 == 0) && !gaps;
      if (!b2b) repeat ($urandom_range(1, 4)) @(posedge clk);
    end

    $display("mechanisms: update=%0d correct_train=%0d inference=%0d clip=%0d saturate=%0d stall=%0d back_to_back=%0d",
             n_update, n_correct_train, n_infer, mdl.clip_events, mdl.sat_events, n_stall, n_b2b);
    chk(n_update > 0, "no weight update happened");
    chk(n_correct_train > 0, "no correct training sample");
    chk(n_infer > 0, "no inference sample");
    chk(mdl.clip_events > 0, "weights never clipped");
    chk(mdl.sat_events > 0, "hidden sums never saturated");
    chk(n_stall > 0, "pixel stream never stalled");
    chk(n_b2b > 0, "no back-to-back sample");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
