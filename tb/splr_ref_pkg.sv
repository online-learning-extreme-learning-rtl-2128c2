// splr_ref_pkg -- reference model of the SPLR-ELM for the testbenches.
//
// Written from the algorithm, not from the RTL: per-neuron LFSR weights
// (feedback = XOR of bits 12..15), Q8.8 x times Q1.15 weight >>> 15, every add
// clamped to 16 bits, bias added after the last pixel, h = (sum > thre);
// o_c = clamped running sum of W(i,c) over active i; argmax with the lowest
// index winning ties; on a training mispredict W(i,y) += lr and
// W(i,yhat) -= lr for active i, each clamped to 16 bits then clipped to
// +/-wmax. Seeds and biases come from the design's constant functions
// splr_pkg::hn_seed / hn_bias, which define the network.
package splr_ref_pkg;
  import splr_pkg::hn_seed;
  import splr_pkg::hn_bias;

  function automatic int clamp16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic logic [15:0] ref_next(logic [15:0] s);
    return {s[14:0], ^(s & 16'hF000)};
  endfunction

  class splr_model;
    int M, D, C;
    logic [15:0] base;
    int W[][];          // W[i][c]
    int clip_events;    // weight writes that hit +/-wmax
    int sat_events;     // hidden sums that saturated

    function new(int d, int m, int c, logic [15:0] b);
      D = d; M = m; C = c; base = b;
      W = new[M];
      foreach (W[i]) begin
        W[i] = new[C];
        foreach (W[i][k]) W[i][k] = 0;
      end
      clip_events = 0;
      sat_events = 0;
    endfunction

    function automatic void hidden(input int x[], input int thre, output bit h[]);
      h = new[M];
      for (int j = 0; j < M; j++) begin
        logic [15:0] s;
        int sum;
        s = hn_seed(j, base);
        sum = 0;
        for (int k = 0; k < D; k++) begin
          longint p;
          p = (longint'(x[k]) * longint'($signed(s))) >>> 15;
          sum = clamp16(longint'(sum) + longint'(clamp16(p)));
          if (sum == 32767 || sum == -32768) sat_events++;
          s = ref_next(s);
        end
        sum = clamp16(longint'(sum) + longint'(int'(hn_bias(j))));
        h[j] = (sum > thre);
      end
    endfunction

    function automatic void predict(input bit h[], output int o[], output int pred);
      o = new[C];
      for (int c = 0; c < C; c++) begin
        o[c] = 0;
        for (int i = 0; i < M; i++)
          if (h[i]) o[c] = clamp16(longint'(o[c]) + longint'(W[i][c]));
      end
      pred = 0;
      for (int c = 1; c < C; c++) if (o[c] > o[pred]) pred = c;
    endfunction

    function automatic int upd(int w, int delta, int wmax);
      int v;
      v = clamp16(longint'(w) + longint'(delta));
      if (v > wmax) begin v = wmax; clip_events++; end
      else if (v < -wmax) begin v = -wmax; clip_events++; end
      return v;
    endfunction

    function automatic void train(input bit h[], input int y, input int pred,
                                  input int lr, input int wmax);
      if (y == pred) return;
      for (int i = 0; i < M; i++)
        if (h[i]) begin
          W[i][y]    = upd(W[i][y], lr, wmax);
          W[i][pred] = upd(W[i][pred], -lr, wmax);
        end
    endfunction
  endclass
endpackage
