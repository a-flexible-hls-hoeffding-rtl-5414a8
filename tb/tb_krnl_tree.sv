// tb_krnl_tree: end-to-end test of the kernel at reduced sizes.
//
// A synthetic clustering stream (K = 3 classes decided by thresholds on two
// of the D = 3 features) is written to the sample array.  The test then
//   1. initialises tree 0 and trains it on 1500 samples (infer-then-train),
//   2. runs 500 inference-only samples on tree 0 and checks the accuracy,
//      that the tree was not changed, and the exact cycle count, obtained by
//      walking the read-back tree here,
//   3. copies tree 0, word by word, into slot 1 through the host port and
//      checks that the copy classifies the inference samples identically,
//   4. initialises tree 1 on a larger (decision list) concept, then continues
//      training it in a second call until it is full, and checks that tree 0 was left
//      alone and that tree 1 went on from where the first call ended,
//   5. checks every read-back tree for well-formed child links.
// Each mechanism (inference, training, split check, split, refused split of
// a full tree, tree reset, tree persistence across calls, two trees on one
// kernel, a tree saved and loaded by the host) is counted, and one that never happened counts as a failure.
module tb_krnl_tree;
  import ht_pkg::*;
  localparam int unsigned D = 3, K = 3, ND = 7, NQ = 16, NMIN = 50, NT = 2, NS = 2048;
  localparam int unsigned NW = $clog2(NT * ND), AW = $clog2(NS), CNW = $clog2(ND + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ap_start = 0, ap_idle, ap_done, init_tree;
  logic tree_id;
  logic [AW:0] n_samples;
  logic hs_we = 0, hs_train, hr_en = 0, hr_trained;
  logic [AW-1:0] hs_addr, hr_addr;
  feat_t [D-1:0] hs_x;
  cls_t hs_label, hr_pred;
  localparam int unsigned SW = $clog2(NT * ND * D * 16), XW = ($bits(node_t) > K * CW) ? $bits(node_t) : K * CW;
  logic hx_tree = 0, hx_we = 0, hx_count_we = 0;
  tree_part_e hx_part = TP_NODE;
  logic [SW-1:0] hx_addr;
  logic [XW-1:0] hx_rdata, hx_wdata;
  logic [CNW-1:0] hx_count, hx_count_wdata;
  logic [31:0] st_cycles, st_inferred, st_trained, st_checks, st_splits, st_full;

  krnl_tree #(.D(D), .K(K), .ND(ND), .NQ(NQ), .NMIN(NMIN), .NT(NT), .NS(NS)) dut (.*);

  feat_t sx [NS][D];
  int    sy [NS];
  int    m_infer = 0, m_train = 0, m_check = 0, m_split = 0, m_full = 0,
         m_init = 0, m_persist = 0, m_multi = 0, m_load = 0;

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int label_of(feat_t x0, feat_t x1);
    if (x0 < 16'd26214) return 0;          // x0 < 0.4
    if (x1 < 16'd39321) return 1;          // x1 < 0.6
    return 2;
  endfunction

  // A larger concept for tree 1: a decision list over all three features
  // that needs more leaves than the tree may have.
  function automatic int label_hard(feat_t x0, feat_t x1, feat_t x2);
    if (!x0[15]) return 0;
    if (!x1[15]) return 1;
    if (!x2[15]) return 2;
    if (!x0[14]) return 0;
    return 1;
  endfunction

  task automatic load(int first, int n, bit train);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      hs_we = 1; hs_addr = AW'(first + i);
      hs_x = '{sx[first+i][2], sx[first+i][1], sx[first+i][0]};
      hs_label = cls_t'(sy[first+i]); hs_train = train;
    end
    @(negedge clk); hs_we = 0;
  endtask

  task automatic call(int t, int n, bit init);
    @(negedge clk);
    tree_id = 1'(t); n_samples = (AW+1)'(n); init_tree = init; ap_start = 1;
    @(negedge clk); ap_start = 0;
    while (!ap_done) @(negedge clk);
    m_infer += st_inferred; m_train += st_trained; m_check += st_checks;
    m_split += st_splits; m_full += st_full; m_init += init;
  endtask

  // Snapshot of a tree read back through the host port.
  typedef node_t tree_t [ND];
  task automatic read_tree(int t, output tree_t tr, output int cnt);
    @(negedge clk); hx_tree = 1'(t); hx_part = TP_NODE;
    for (int n = 0; n < ND; n++) begin
      hx_addr = SW'(n); #1; tr[n] = node_t'(hx_rdata[$bits(node_t)-1:0]);
    end
    cnt = int'(hx_count);
  endtask

  // Copy every word of tree `from` into tree `to` through the host port,
  // as software saving one tree object and loading it in another slot.
  task automatic copy_tree(int from, int to);
    logic [XW-1:0] w;
    for (int p = 0; p < 4; p++) begin
      automatic int words = (p < 2) ? ND : ND * D * NQ;
      for (int a = 0; a < words; a++) begin
        @(negedge clk);
        hx_part = tree_part_e'(p); hx_addr = SW'(a); hx_tree = 1'(from); hx_we = 0;
        #1; w = hx_rdata;
        hx_tree = 1'(to); hx_wdata = w; hx_we = 1;
      end
    end
    @(negedge clk);
    hx_we = 0; hx_tree = 1'(from); #1;
    hx_count_wdata = hx_count; hx_tree = 1'(to); hx_count_we = 1;
    @(negedge clk); hx_count_we = 0;
  endtask

  task automatic check_links(tree_t tr, int cnt, int t);
    int bad = 0;
    for (int n = 0; n < cnt; n++)
      if (!tr[n].is_leaf) begin
        int l = int'(tr[n].left);
        if (l <= n || l + 1 >= cnt || int'(tr[n].feat) >= D) bad++;
      end
    check(bad == 0 && cnt % 2 == 1, "tree structure");
  endtask

  function automatic int depth_of(tree_t tr, int t, int i);
    int n = 0, dep = 0;
    while (!tr[n].is_leaf) begin
      n = (sx[i][int'(tr[n].feat)] <= tr[n].thr) ? int'(tr[n].left) : int'(tr[n].left) + 1;
      dep++;
    end
    return dep;
  endfunction

  initial begin
    tree_t t0a, t0b, t1a, t1b;
    int c0a, c0b, c1a, c1b, correct, exp_cycles, agree;
    bit same;
    int pred0 [500];
    for (int i = 0; i < NS; i++) begin
      for (int d = 0; d < D; d++) sx[i][d] = feat_t'($urandom);
      sy[i] = label_of(sx[i][0], sx[i][1]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(0, 1500, 1);
    load(1500, 500, 0);

    // 1. train tree 0
    call(0, 1500, 1);
    check(st_inferred == 1500 && st_trained == 1500, "train call counts");
    read_tree(0, t0a, c0a);
    check_links(t0a, c0a, 0);
    check(c0a >= 3, "tree 0 grew");

    // 2. inference only: samples 1500..1999 live at addresses 1500.., so run
    //    2000 samples would retrain; instead copy them to the front as
    //    inference-only samples.
    for (int i = 0; i < 500; i++) begin
      for (int d = 0; d < D; d++) sx[i][d] = sx[1500+i][d];
      sy[i] = sy[1500+i];
    end
    load(0, 500, 0);
    call(0, 500, 0);
    read_tree(0, t0b, c0b);
    same = (c0a == c0b);
    for (int n = 0; n < ND; n++) if (n < c0a && t0a[n] != t0b[n]) same = 0;
    check(same && st_trained == 0, "inference leaves the tree alone");
    correct = 0; exp_cycles = 1 + 2;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk); hr_en = 1; hr_addr = AW'(i);
      @(negedge clk); hr_en = 0;
      if (int'(hr_pred) == sy[i]) correct++;
      pred0[i] = int'(hr_pred);
      check(!hr_trained, "result flag");
      exp_cycles += depth_of(t0b, 0, i) + 7;
    end
    $display("tree 0: %0d nodes, inference accuracy %0d/500, %0d cycles", c0b, correct, st_cycles);
    check(correct >= 400, "accuracy above 80%");
    check(int'(st_cycles) == exp_cycles, $sformatf("cycle count %0d, expected %0d", st_cycles, exp_cycles));

    // 2b. save tree 0 and load it into slot 1; the copy must classify the
    //     same samples in the same way.
    copy_tree(0, 1);
    call(1, 500, 0);
    agree = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk); hr_en = 1; hr_addr = AW'(i);
      @(negedge clk); hr_en = 0;
      if (int'(hr_pred) == pred0[i]) agree++;
    end
    check(agree == 500, $sformatf("loaded copy agrees on %0d of 500", agree));
    if (agree == 500) m_load++;

    // 3. tree 1: train from scratch on a harder stream, continue in a
    //    second call until it is full.
    for (int i = 0; i < 1500; i++) begin
      for (int d = 0; d < D; d++) sx[i][d] = feat_t'($urandom);
      sy[i] = label_hard(sx[i][0], sx[i][1], sx[i][2]);
    end
    load(0, 1500, 1);
    call(1, 300, 1);
    m_multi++;
    read_tree(1, t1a, c1a);
    check_links(t1a, c1a, 1);
    call(1, 1500, 0);
    read_tree(1, t1b, c1b);
    check_links(t1b, c1b, 1);
    check(c1b >= c1a && t1b[0].is_leaf == (c1b == 1), "tree 1 kept growing");
    if (c1a > 1 && t1b[0] == t1a[0]) m_persist++;
    if (c1a == 1 && c1b > 1) m_persist++;
    read_tree(0, t0a, c0a);
    same = (c0a == c0b);
    for (int n = 0; n < ND; n++) if (n < c0a && t0a[n] != t0b[n]) same = 0;
    check(same, "tree 0 untouched by tree 1");
    $display("tree 1: %0d then %0d nodes, refused splits %0d", c1a, c1b, m_full);

    check(m_infer > 0, "inference happened");
    check(m_train > 0, "training happened");
    check(m_check > 0, "split checks happened");
    check(m_split > 0, "splits happened");
    check(m_full > 0, "a full tree refused a split");
    check(m_init > 0, "tree reset happened");
    check(m_persist > 0, "tree persisted across calls");
    check(m_multi > 0, "two trees on one kernel");
    check(m_load > 0, "tree saved and loaded by the host");
    $display("mechanisms: infer %0d train %0d checks %0d splits %0d full %0d init %0d persist %0d multi %0d load %0d",
             m_infer, m_train, m_check, m_split, m_full, m_init, m_persist, m_multi, m_load);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
