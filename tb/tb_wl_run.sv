// tb_wl_run: runs one benchmark workload on a kernel at its default sizes
// (K = 5, 100 nodes, 40000-entry sample and result arrays, two tree slots)
// with only the feature count D set, and reports its checks.  Used by
// tb_krnl_tree_workloads.
//
// The workload is a clustering stream: class k has a centre drawn in
// [0.2,0.8]^D, at least 0.2 from every other centre in some feature, and
// samples are the centre plus uniform noise of half-width 0.08 per feature.  It runs in two phases, as the benchmark table does:
//   training:  N samples, all flagged for training, in calls of at most
//              40000 samples (the array size); the first call resets the
//              tree, later calls go on with it;
//   inference: N fresh samples, none flagged, through the trained tree.
// A call's results are read back before the next call reloads the arrays.
// Checked: every sample inferred and trained as flagged, the tree only grows
// during training and is unchanged by inference, the prequential accuracy of
// the last training call and the inference accuracy are at least MIN_ACC
// percent, and the cycles of every inference call equal 3 plus the sum of
// (depth + 7) over its samples, the depth being found by walking the
// read-back tree here.  The cycle totals are also printed as times at the
// reference clock of 103.6 MHz next to the times measured on the reference
// board (PAPER_TRAIN_MS, PAPER_INFER_MS), which include the host's data
// transfers and are printed for comparison only.
module tb_wl_run #(
  parameter int unsigned D              = 3,
  parameter int unsigned N              = 40000,
  parameter int unsigned MIN_ACC        = 80,
  parameter int unsigned PAPER_TRAIN_MS = 0,
  parameter int unsigned PAPER_INFER_MS = 0
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  import ht_pkg::*;
  localparam int unsigned K = K_DEF, ND = ND_DEF, NT = NT_DEF, NS = NS_DEF;
  localparam int unsigned AW = $clog2(NS), CNW = $clog2(ND + 1);
  localparam int unsigned SW = $clog2(NT * ND * D * NQ_DEF);
  localparam int unsigned XW = ($bits(node_t) > K * CW) ? $bits(node_t) : K * CW;
  localparam int unsigned NCALL = (N + NS - 1) / NS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ap_start = 0, ap_idle, ap_done, init_tree = 0;
  logic tree_id = 0;
  logic [AW:0] n_samples;
  logic hs_we = 0, hs_train, hr_en = 0, hr_trained;
  logic [AW-1:0] hs_addr, hr_addr;
  feat_t [D-1:0] hs_x;
  cls_t hs_label, hr_pred;
  logic hx_tree = 0, hx_we = 0, hx_count_we = 0;
  tree_part_e hx_part = TP_NODE;
  logic [SW-1:0] hx_addr;
  logic [XW-1:0] hx_rdata, hx_wdata;
  logic [CNW-1:0] hx_count, hx_count_wdata;
  logic [31:0] st_cycles, st_inferred, st_trained, st_checks, st_splits, st_full;

  krnl_tree #(.D(D)) dut (.*);

  int cen [K][D];
  byte unsigned sy [NS];
  node_t tree [ND];
  int tree_n;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (D=%0d N=%0d): %s", D, N, what); end
  endtask

  // reads tree 0 back into tree[] and tree_n
  task automatic read_tree();
    hx_tree = 0; hx_part = TP_NODE; #1;
    tree_n = int'(hx_count);
    for (int n = 0; n < tree_n; n++) begin
      hx_addr = SW'(n); #1;
      tree[n] = node_t'(hx_rdata[$bits(node_t)-1:0]);
    end
  endtask

  // fills the sample array with m fresh samples; returns the summed
  // (depth + 7) of the samples in the current tree
  task automatic load(int m, bit train, output int walk);
    walk = 0;
    for (int i = 0; i < m; i++) begin
      automatic int k = $urandom_range(0, K - 1);
      automatic int n = 0, dep = 0;
      @(negedge clk);
      hs_we = 1; hs_addr = AW'(i); hs_label = cls_t'(k); hs_train = train;
      for (int d = 0; d < D; d++) hs_x[d] = feat_t'(cen[k][d] + $urandom_range(0, 10486) - 5243);
      sy[i] = byte'(k);
      while (!tree[n].is_leaf) begin
        n = (hs_x[int'(tree[n].feat)] <= tree[n].thr) ? int'(tree[n].left) : int'(tree[n].left) + 1;
        dep++;
      end
      walk += dep + 7;
    end
    @(negedge clk); hs_we = 0;
  endtask

  task automatic call(int m, bit init);
    n_samples = (AW+1)'(m); init_tree = init; ap_start = 1;
    @(negedge clk); ap_start = 0;
    while (!ap_done) @(negedge clk);
  endtask

  task automatic count_correct(int m, output int correct);
    correct = 0;
    for (int i = 0; i < m; i++) begin
      @(negedge clk); hr_en = 1; hr_addr = AW'(i);
      @(negedge clk); hr_en = 0;
      if (int'(hr_pred) == int'(sy[i])) correct++;
    end
  endtask

  initial begin
    longint train_cyc, infer_cyc;
    int walk;
    int correct, seen, nodes_before, m, bad_calls;
    bit grew_ok, same;
    node_t trained [ND];
    finished = 0; checks = 0; failures = 0;
    train_cyc = 0; infer_cyc = 0; grew_ok = 1; bad_calls = 0;
    // centres are redrawn until every pair differs by at least 0.2 in some
    // feature, so that the classes do not overlap
    for (int k = 0; k < K; k++) begin
      bit close;
      do begin
        for (int d = 0; d < D; d++) cen[k][d] = $urandom_range(13107, 52428);
        close = 0;
        for (int o = 0; o < k; o++) begin
          automatic bit near = 1;
          for (int d = 0; d < D; d++)
            if (cen[k][d] - cen[o][d] >= 13107 || cen[o][d] - cen[k][d] >= 13107) near = 0;
          if (near) close = 1;
        end
      end while (close);
    end
    tree[0] = '0; tree[0].is_leaf = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // training phase
    nodes_before = 1; correct = 0; seen = 0;
    for (int c = 0; c < int'(NCALL); c++) begin
      m = (c == int'(NCALL) - 1) ? int'(N) - c * int'(NS) : int'(NS);
      load(m, 1'b1, walk);
      call(m, c == 0);
      train_cyc += longint'(st_cycles);
      if (st_inferred != 32'(m) || st_trained != 32'(m)) bad_calls++;
      read_tree();
      if (tree_n < nodes_before || tree_n != 1 + 2 * (tree_n / 2)) grew_ok = 0;
      nodes_before = tree_n;
      if (c == int'(NCALL) - 1) begin count_correct(m, correct); seen = m; end
    end
    check(bad_calls == 0, "training calls inferred and trained every sample");
    check(grew_ok && tree_n > 1, "the tree grew across the training calls");
    check(correct * 100 >= int'(MIN_ACC) * seen, $sformatf("prequential accuracy %0d/%0d", correct, seen));
    $display("D=%0d N=%0d training: %0d calls, %0d nodes, accuracy of last call %0d/%0d, %0d cycles = %0d ms at 103.6 MHz (reference board: %0d ms)",
             D, N, NCALL, tree_n, correct, seen, train_cyc, train_cyc / 103600, PAPER_TRAIN_MS);

    // inference phase
    trained = tree; bad_calls = 0; correct = 0; seen = 0;
    for (int c = 0; c < int'(NCALL); c++) begin
      int ok;
      m = (c == int'(NCALL) - 1) ? int'(N) - c * int'(NS) : int'(NS);
      load(m, 1'b0, walk);
      call(m, 1'b0);
      infer_cyc += longint'(st_cycles);
      if (st_inferred != 32'(m) || st_trained != 0 || int'(st_cycles) != walk + 3) bad_calls++;
      count_correct(m, ok);
      correct += ok; seen += m;
    end
    read_tree();
    same = (tree_n == nodes_before);
    for (int n = 0; n < tree_n; n++) if (tree[n] != trained[n]) same = 0;
    check(bad_calls == 0, "inference calls: no training, cycles = 3 + sum of (depth + 7)");
    check(same, "inference leaves the tree unchanged");
    check(correct * 100 >= int'(MIN_ACC) * seen, $sformatf("inference accuracy %0d/%0d", correct, seen));
    $display("D=%0d N=%0d inference: accuracy %0d/%0d, %0d cycles = %0d ms at 103.6 MHz (reference board: %0d ms)",
             D, N, correct, seen, infer_cyc, infer_cyc / 103600, PAPER_INFER_MS);
    finished = 1;
  end
endmodule
