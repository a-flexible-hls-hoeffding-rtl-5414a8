// tb_split_evaluator: loads hand-made and random leaf statistics and checks
// the split decision against a reference computed here in floating point:
// Gini-based scores of every candidate, best and runner-up feature, and the
// Hoeffding test dG > sqrt(ln(1/delta)/(2n)) or the tie rule
// sqrt(ln(1/delta)/(2n)) < tau.  Random cases close to a decision boundary
// (where fixed-point rounding may tip the result) are skipped.  The cycle
// count of every evaluation is checked against its bound.
module tb_split_evaluator;
  import ht_pkg::*;
  localparam int unsigned NN = 4, D = 2, K = 3, NQ = 4;
  localparam int unsigned NW = 2, SW = 5, NS = NN * D * NQ;
  localparam int unsigned DVW = 2 * CW + 2 + 1 + FRAC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, skipped = 0, nsplit = 0;

  logic start = 0, busy, done, do_split;
  logic [NW-1:0] node, cc_raddr;
  fidx_t feat;
  feat_t thr, q_rdata;
  cls_t cls_l, cls_r;
  logic [DVW:0] score_best, score_second;
  logic [SW-1:0] q_raddr, b_raddr;
  logic [K-1:0][CW-1:0] cc_rdata, b_rdata;

  feat_t qm [NS];
  logic [K-1:0][CW-1:0] bm [NS];
  logic [K-1:0][CW-1:0] cm [NN];
  assign q_rdata  = qm[q_raddr];
  assign b_rdata  = bm[b_raddr];
  assign cc_rdata = cm[cc_raddr];

  split_evaluator #(.NN(NN), .D(D), .K(K), .NQ(NQ)) dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int amax(int v[K]);
    int b = 0;
    for (int k = 1; k < K; k++) if (v[k] > v[b]) b = k;
    return b;
  endfunction

  // Evaluate node n; `strict` demands a decisive reference.
  task automatic evaluate(int n, bit strict, string name);
    real s0, s1, s2, sd, s, ntot, eps, dg, margin;
    int f1, j1, fbj, cyc;
    bit valid, exp_split;
    int cl[K], cr[K];
    ntot = 0; s0 = 0;
    for (int k = 0; k < K; k++) ntot += real'(cm[n][k]);
    for (int k = 0; k < K; k++) if (ntot > 0) s0 += real'(cm[n][k]) ** 2 / ntot;
    s1 = s0; s2 = s0; valid = 0; f1 = 0; j1 = 0; margin = 1.0e9;
    for (int d = 0; d < D; d++) begin
      sd = 0; fbj = 0;
      for (int j = 0; j < NQ; j++) begin
        real nl = 0, nr = 0, sl = 0, sr = 0;
        for (int k = 0; k < K; k++) begin
          real a = real'(bm[(n*D + d)*NQ + j][k]), c = real'(cm[n][k]);
          nl += a; nr += c - a;
        end
        for (int k = 0; k < K; k++) begin
          real a = real'(bm[(n*D + d)*NQ + j][k]), c = real'(cm[n][k]);
          if (nl > 0) sl += a * a / nl;
          if (nr > 0) sr += (c - a) * (c - a) / nr;
        end
        s = sl + sr;
        if (s > sd && s - sd < margin) margin = s - sd;
        if (s <= sd && sd - s < margin && sd != s) margin = sd - s;
        if (s > sd) begin sd = s; fbj = j; end
      end
      if (sd > s1) begin s2 = s1; s1 = sd; valid = 1; f1 = d; j1 = fbj; end
      else if (sd > s2) s2 = sd;
    end
    exp_split = 0;
    if (ntot > 0) begin
      eps = $sqrt($ln(1.0 / DELTA) / (2.0 * ntot));
      dg  = (s1 - s2) / ntot;
      exp_split = valid && (dg > eps || eps < TAU);
      if (strict && ((dg - eps) ** 2 < (0.05 * eps) ** 2 || margin < 0.05 ||
                     (eps - TAU) ** 2 < (0.02 * TAU) ** 2 || (valid && s1 - s0 < 0.05))) begin
        skipped++;
        return;
      end
    end
    for (int k = 0; k < K; k++) begin
      cl[k] = int'(bm[(n*D + f1)*NQ + j1][k]);
      cr[k] = int'(cm[n][k]) - cl[k];
    end
    @(negedge clk);
    node = NW'(n); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (do_split != exp_split) begin
      failures++;
      $display("%s: split %0b, expected %0b (n=%0f)", name, do_split, exp_split, ntot);
    end else if (exp_split) begin
      nsplit++;
      checks++;
      if (int'(feat) != f1 || thr != qm[(n*D + f1)*NQ + j1] ||
          int'(cls_l) != amax(cl) || int'(cls_r) != amax(cr)) begin
        failures++;
        $display("%s: split on x%0d <= %0d classes %0d/%0d, expected x%0d <= %0d classes %0d/%0d",
                 name, feat, thr, cls_l, cls_r, f1, qm[(n*D + f1)*NQ + j1], amax(cl), amax(cr));
      end
    end
    checks++;
    if (cyc > D * NQ * (2 * DVW + 5) + DVW + 10) begin
      failures++;
      $display("%s: took %0d cycles", name, cyc);
    end
  endtask

  task automatic set_counts(int n, int c0, int c1, int c2);
    cm[n][0] = CW'(c0); cm[n][1] = CW'(c1); cm[n][2] = CW'(c2);
  endtask
  task automatic set_below(int n, int d, int j, int b0, int b1, int b2);
    bm[(n*D + d)*NQ + j][0] = CW'(b0); bm[(n*D + d)*NQ + j][1] = CW'(b1); bm[(n*D + d)*NQ + j][2] = CW'(b2);
  endtask

  initial begin
    for (int i = 0; i < NS; i++) begin qm[i] = feat_t'($urandom); bm[i] = '0; end
    for (int n = 0; n < NN; n++) cm[n] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // A: feature 1, quantile 2 separates class 0 from classes 1 and 2.
    set_counts(1, 100, 120, 80);
    for (int j = 0; j < NQ; j++) begin
      set_below(1, 0, j, 25*(j+1)/2, 30*(j+1)/2, 20*(j+1)/2);    // uninformative
      set_below(1, 1, j, (j >= 2) ? 100 : 40*j, (j == 3) ? 60 : 0, (j == 3) ? 40 : 0);
    end
    evaluate(1, 0, "separable");

    // B: a few samples, weak evidence: no split.
    set_counts(2, 6, 5, 4);
    for (int j = 0; j < NQ; j++) begin
      set_below(2, 0, j, (j+1) * 6 / 4, (j+1) * 5 / 4, j);
      set_below(2, 1, j, j, (j+1) * 5 / 4, (j+1) * 4 / 4);
    end
    evaluate(2, 0, "weak");

    // C: two equally good features and many samples: split by the tie rule
    // on the first of them.
    set_counts(3, 1000, 1000, 1000);
    for (int j = 0; j < NQ; j++) begin
      set_below(3, 0, j, 250*(j+1), 100*j, 50*j);
      set_below(3, 1, j, 250*(j+1), 100*j, 50*j);
    end
    evaluate(3, 0, "tie");

    // D: empty leaf.
    cm[0] = '0;
    evaluate(0, 0, "empty");

    // E: random statistics.
    for (int t = 0; t < 60; t++) begin
      automatic int scale = (t % 3 == 0) ? 40 : (t % 3 == 1) ? 400 : 3000;
      for (int k = 0; k < K; k++) cm[2][k] = CW'($urandom_range(0, scale));
      for (int d = 0; d < D; d++) for (int j = 0; j < NQ; j++) begin
        qm[(2*D + d)*NQ + j] = feat_t'($urandom);
        for (int k = 0; k < K; k++) bm[(2*D + d)*NQ + j][k] = CW'($urandom_range(0, int'(cm[2][k])));
      end
      evaluate(2, 1, "random");
    end
    checks++;
    if (nsplit < 3) begin failures++; $display("only %0d splits seen", nsplit); end
    $display("random cases skipped near a boundary: %0d, splits: %0d", skipped, nsplit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
