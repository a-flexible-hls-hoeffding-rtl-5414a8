// tb_krnl_tree_full: one complete kernel call at the default sizes
// (D = 3 features, K = 5 classes, up to 100 nodes per tree, 16 quantiles,
// n_min = 200) on a stream of 40000 samples, the size of the smallest
// synthetic benchmark of the D3/K5 configuration.
//
// The stream has five clusters, one per class, each a cube of half-width
// 0.08 around a fixed centre in [0,1)^3; all samples are flagged for
// training, so each is classified by the tree as it stands and then learnt
// from (prequential evaluation).  Checked: every sample inferred and
// trained, the tree grew and is well formed, the accuracy over the last
// 10000 samples, and the cycles per sample.
module tb_krnl_tree_full;
  import ht_pkg::*;
  localparam int unsigned D = 3, K = 5, ND = 100, NS = 40000, NT = 2;
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

  krnl_tree dut (.*);

  byte unsigned sy [NS];
  // cluster centres in units of 1/100
  int cen [K][D] = '{'{20, 20, 20}, '{80, 20, 50}, '{20, 80, 80}, '{80, 80, 20}, '{50, 50, 80}};

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int correct, cnt, bad;
    node_t nd;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      automatic int k = $urandom_range(0, K - 1);
      @(negedge clk);
      hs_we = 1; hs_addr = AW'(i); hs_label = cls_t'(k); hs_train = 1;
      for (int d = 0; d < D; d++)
        hs_x[d] = feat_t'((cen[k][d] * 65536) / 100 + $urandom_range(0, 10486) - 5243);
      sy[i] = byte'(k);
    end
    @(negedge clk); hs_we = 0;

    @(negedge clk);
    tree_id = 0; n_samples = (AW+1)'(NS); init_tree = 1; ap_start = 1;
    @(negedge clk); ap_start = 0;
    while (!ap_done) @(negedge clk);
    check(st_inferred == NS && st_trained == NS, "every sample inferred and trained");
    check(st_splits > 0 && st_checks > 0, "split checks and splits happened");

    // tree shape
    hx_tree = 0; hx_part = TP_NODE; #1; cnt = int'(hx_count); bad = 0;
    for (int n = 0; n < cnt; n++) begin
      hx_addr = SW'(n); #1; nd = node_t'(hx_rdata[$bits(node_t)-1:0]);
      if (!nd.is_leaf && (int'(nd.left) <= n || int'(nd.left) + 1 >= cnt || int'(nd.feat) >= D)) bad++;
    end
    check(bad == 0 && cnt == 1 + 2 * int'(st_splits), "tree well formed");

    // prequential accuracy over the last 10000 samples
    correct = 0;
    for (int i = NS - 10000; i < NS; i++) begin
      @(negedge clk); hr_en = 1; hr_addr = AW'(i);
      @(negedge clk); hr_en = 0;
      if (int'(hr_pred) == int'(sy[i])) correct++;
    end
    $display("nodes %0d, splits %0d, checks %0d, accuracy (last 10000) %0d, cycles %0d (%0d per sample)",
             cnt, st_splits, st_checks, correct, st_cycles, st_cycles / NS);
    check(correct >= 9000, "accuracy above 90%");
    check(st_cycles / NS < 200, "cycles per sample");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
