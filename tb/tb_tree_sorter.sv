// tb_tree_sorter: sorts random samples through a three-level tree shaped
// like a small Covertype model (root "x0 <= 0.739", its true child
// "x2 <= 0.091") and through a second tree, stored from slot 8, whose child
// links count from its own root and one of whose leaves is empty.
// Leaf, depth, predicted class and the depth + 3 cycle latency are compared
// with a walk and an argmax done here.
module tb_tree_sorter;
  import ht_pkg::*;
  localparam int unsigned NN = 16, D = 3, K = 4, NW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  logic [NW-1:0] root, leaf, nd_addr, cc_addr;
  feat_t [D-1:0] x;
  cls_t pred;
  logic [15:0] depth;
  node_t nd_data;
  logic [K-1:0][CW-1:0] cc_data;

  node_t nodes [NN];
  logic [K-1:0][CW-1:0] ccnt [NN];
  assign nd_data = nodes[nd_addr];
  assign cc_data = ccnt[cc_addr];

  tree_sorter #(.NN(NN), .D(D), .K(K)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic node_t leaf_n(int c);
    return '{is_leaf: 1'b1, feat: '0, thr: '0, left: '0, cls: cls_t'(c), n_since: '0};
  endfunction
  function automatic node_t inner_n(int f, int t, int l);
    return '{is_leaf: 1'b0, feat: fidx_t'(f), thr: feat_t'(t), left: nidx_t'(l), cls: '0, n_since: '0};
  endfunction

  initial begin
    for (int i = 0; i < NN; i++) begin nodes[i] = leaf_n(0); ccnt[i] = '0; end
    nodes[0] = inner_n(0, int'(0.739 * 65536.0), 1);
    nodes[1] = inner_n(2, int'(0.091 * 65536.0), 3);
    nodes[2] = leaf_n(1);
    nodes[3] = leaf_n(1);
    nodes[4] = leaf_n(2);
    nodes[8] = inner_n(1, 32768, 1);   // second tree, children 9 and 10
    nodes[9] = leaf_n(2);              // empty leaf
    nodes[10] = leaf_n(0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int r, exp_leaf, exp_depth, exp_cls, cyc;
      logic [CW-1:0] bc;
      // fresh leaf counts now and then, zero counts for one leaf
      if (t % 50 == 0) begin
        for (int i = 2; i <= 10; i++)
          for (int k = 0; k < K; k++) ccnt[i][k] = CW'($urandom_range(0, 1000));
        if (t % 100 == 0) begin ccnt[4] = '0; ccnt[9] = '0; end
      end
      r = (t % 5 == 4) ? 8 : 0;
      for (int d = 0; d < D; d++) x[d] = feat_t'($urandom);
      if (t % 11 == 0) x[0] = feat_t'(int'(0.739 * 65536.0));   // on the threshold
      // reference walk
      exp_leaf = r; exp_depth = 0;
      while (!nodes[exp_leaf].is_leaf) begin
        exp_leaf = r + ((x[nodes[exp_leaf].feat] <= nodes[exp_leaf].thr) ? int'(nodes[exp_leaf].left)
                                                                         : int'(nodes[exp_leaf].left) + 1);
        exp_depth++;
      end
      exp_cls = int'(nodes[exp_leaf].cls); bc = 0;
      for (int k = 0; k < K; k++) if (ccnt[exp_leaf][k] > bc) begin bc = ccnt[exp_leaf][k]; exp_cls = k; end
      @(negedge clk);
      root = NW'(r); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (int'(leaf) != exp_leaf || int'(depth) != exp_depth || int'(pred) != exp_cls) begin
        failures++;
        $display("sample %0d: leaf %0d/%0d depth %0d/%0d class %0d/%0d", t, leaf, exp_leaf,
                 depth, exp_depth, pred, exp_cls);
      end
      checks++;
      if (cyc != exp_depth + 3) begin
        failures++;
        $display("sample %0d: latency %0d, expected %0d", t, cyc, exp_depth + 3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
