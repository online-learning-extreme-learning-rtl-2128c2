// tb_splr_elm_workload -- the SPLR-ELM on an MNIST-shaped online-learning
// stream, at the smallest FPGA size of the evaluation (784-512-10).
//
// No image dataset is available to a simulation, so the stream is
// synthetic: ten 784-pixel class prototypes in Q8.8 [0, 1], each
// sample a prototype plus approximately Gaussian noise (sum of four uniform
// draws, standard deviation about 0.29). The prototypes share one background
// and differ in about one pixel in twelve. The training stream is long-tailed like the skewed benchmark:
// class c appears 40 - 2c times (40 for class 0 down to 22 for class 9, a
// 2x-like imbalance scaled to a tenth of the benchmark), in shuffled order,
// for two epochs. A held-out set of 50 noisy samples is then classified in
// inference mode. Every result (class, value, all outputs, update flag,
// latency) is compared with the reference model; training and test accuracy
// are printed for information only.
module tb_splr_elm_workload;
  import splr_pkg::*;
  import splr_ref_pkg::*;
  localparam int D = 784, M = 512, C = 10, IW = 4;
  localparam int NTEST = 50;

  logic      clk = 0, rst_n = 0;
  splr_cfg_t cfg;
  logic      x_valid = 0, x_ready, x_train = 0;
  word_t     x_data = 0;
  logic [IW-1:0] x_label = 0, res_pred, o_index;
  logic      busy_init, res_valid, res_updated, o_valid;
  word_t     res_val, o_data;
  word_t     res_o [C];
  int checks = 0, failures = 0, cyc = 0;

  splr_elm #(.D(D), .M(M), .C(C)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  splr_model mdl;
  int proto [C][];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (900 * (D + 2 * M + 10) + 10 * M) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void make_sample(int y, ref int xs[]);
    foreach (xs[k]) begin
      int n;
      n = $urandom_range(0, 64) + $urandom_range(0, 64) + $urandom_range(0, 64)
        + $urandom_range(0, 64) - 128;
      xs[k] = proto[y][k] + n;
      if (xs[k] < 0) xs[k] = 0;
      if (xs[k] > 256) xs[k] = 256;
    end
  endfunction

  // run one sample through DUT and model; returns 1 if the prediction was right
  task automatic run_sample(int y, bit train, output bit correct);
    int xs[], o[], p, t0, lat;
    bit h[];
    xs = new[D];
    make_sample(y, xs);
    mdl.hidden(xs, int'(cfg.thre), h);
    mdl.predict(h, o, p);
    x_train <= train;
    x_label <= IW'(y);
    for (int k = 0; k < D; k++) begin
      x_valid <= 1;
      x_data <= word_t'(xs[k]);
      #1;
      while (!x_ready) begin @(posedge clk); #1; end
      if (k == 0) t0 = cyc;
      @(posedge clk);
    end
    x_valid <= 0;
    #1;
    while (!res_valid) begin @(posedge clk); #1; end
    lat = cyc - t0;
    chk(lat == ((train && p != y) ? D + 2 * M + 3 : D + M + 3), $sformatf("latency %0d", lat));
    chk(int'(res_pred) == p, $sformatf("pred %0d exp %0d", res_pred, p));
    chk(int'(res_val) == o[p], "pred value");
    for (int c = 0; c < C; c++) chk(int'(res_o[c]) == o[c], $sformatf("o[%0d]", c));
    chk(res_updated == (train && p != y), "update flag");
    if (train) mdl.train(h, y, p, int'(cfg.lr), int'(cfg.wmax));
    correct = (p == y);
    if (!train) repeat (C + 1) @(posedge clk);
  endtask

  initial begin
    int order[$];
    int right, n;
    bit ok;
    cfg.lr   = 16'sd8;     // 1/32
    cfg.wmax = 16'sd256;   // 1.0
    cfg.thre = 16'sd0;
    mdl = new(D, M, C, 16'hACE1);
    // prototypes share a common background; each class differs from it in
    // about one pixel in twelve
    proto[0] = new[D];
    foreach (proto[0][k]) proto[0][k] = ($urandom_range(0, 3) == 0) ? $urandom_range(128, 256) : $urandom_range(0, 40);
    for (int c = 1; c < C; c++) proto[c] = proto[0];
    for (int c = 0; c < C; c++)
      foreach (proto[c][k]) if ($urandom_range(0, 11) == 0) proto[c][k] = 256 - proto[c][k];
    for (int c = 0; c < C; c++) repeat (40 - 2 * c) order.push_back(c);

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    while (busy_init) begin @(posedge clk); #1; end

    for (int ep = 0; ep < 2; ep++) begin
      order.shuffle();
      right = 0;
      foreach (order[i]) begin
        run_sample(order[i], 1'b1, ok);
        right += ok;
      end
      $display("epoch %0d: %0d samples, online training accuracy %0d%%", ep, order.size(), right * 100 / order.size());
    end
    right = 0;
    for (int i = 0; i < NTEST; i++) begin
      run_sample(i % C, 1'b0, ok);
      right += ok;
    end
    $display("test: %0d samples, accuracy %0d%%", NTEST, right * 100 / NTEST);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
