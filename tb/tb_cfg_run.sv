// tb_cfg_run: drives one kernel configuration through a single training call
// on a clustered stream and reports its checks.  Used by
// tb_krnl_tree_configs to run several configurations side by side.
//
// Each class k has a centre in [0.2,0.8]^D drawn at random; samples are the
// centre plus uniform noise of half-width 0.08 per feature.  All N samples
// are trained on (infer-then-train).  Checked: every sample inferred and
// trained, at least one split, a well-formed tree, and a prequential accuracy
// over the last quarter of the stream of at least MIN_ACC percent.
module tb_cfg_run #(
  parameter int unsigned D       = 3,
  parameter int unsigned K       = 5,
  parameter int unsigned ND      = 100,
  parameter int unsigned N       = 2000,
  parameter int unsigned MIN_ACC = 60
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  import ht_pkg::*;
  localparam int unsigned NT = 1, NW = $clog2(ND), AW = $clog2(N), CNW = $clog2(ND + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ap_start = 0, ap_idle, ap_done, init_tree = 1;
  logic tree_id = 0;
  logic [AW:0] n_samples;
  logic hs_we = 0, hs_train, hr_en = 0, hr_trained;
  logic [AW-1:0] hs_addr, hr_addr;
  feat_t [D-1:0] hs_x;
  cls_t hs_label, hr_pred;
  localparam int unsigned SW = $clog2(ND * D * 16), XW = ($bits(node_t) > K * CW) ? $bits(node_t) : K * CW;
  logic hx_tree = 0, hx_we = 0, hx_count_we = 0;
  tree_part_e hx_part = TP_NODE;
  logic [SW-1:0] hx_addr;
  logic [XW-1:0] hx_rdata, hx_wdata;
  logic [CNW-1:0] hx_count, hx_count_wdata;
  logic [31:0] st_cycles, st_inferred, st_trained, st_checks, st_splits, st_full;

  krnl_tree #(.D(D), .K(K), .ND(ND), .NT(NT), .NS(N)) dut (.*);

  int cen [K][D];
  byte unsigned sy [N];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (D=%0d K=%0d ND=%0d): %s", D, K, ND, what); end
  endtask

  initial begin
    int correct, cnt, bad;
    node_t nd;
    finished = 0; checks = 0; failures = 0;
    for (int k = 0; k < K; k++) for (int d = 0; d < D; d++) cen[k][d] = $urandom_range(13107, 52428);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      automatic int k = $urandom_range(0, K - 1);
      @(negedge clk);
      hs_we = 1; hs_addr = AW'(i); hs_label = cls_t'(k); hs_train = 1;
      for (int d = 0; d < D; d++) hs_x[d] = feat_t'(cen[k][d] + $urandom_range(0, 10486) - 5243);
      sy[i] = byte'(k);
    end
    @(negedge clk); hs_we = 0;
    n_samples = (AW+1)'(N); ap_start = 1;
    @(negedge clk); ap_start = 0;
    while (!ap_done) @(negedge clk);
    check(st_inferred == N && st_trained == N, "every sample inferred and trained");
    check(st_splits > 0, "the tree split");
    hx_part = TP_NODE; #1; cnt = int'(hx_count); bad = 0;
    for (int n = 0; n < cnt; n++) begin
      hx_addr = SW'(n); #1; nd = node_t'(hx_rdata[$bits(node_t)-1:0]);
      if (!nd.is_leaf && (int'(nd.left) <= n || int'(nd.left) + 1 >= cnt || int'(nd.feat) >= D)) bad++;
    end
    check(bad == 0 && cnt == 1 + 2 * int'(st_splits), "tree well formed");
    correct = 0;
    for (int i = N - N / 4; i < N; i++) begin
      @(negedge clk); hr_en = 1; hr_addr = AW'(i);
      @(negedge clk); hr_en = 0;
      if (int'(hr_pred) == int'(sy[i])) correct++;
    end
    $display("D=%0d K=%0d ND=%0d N=%0d: %0d nodes, %0d checks, accuracy %0d/%0d, %0d cycles per sample",
             D, K, ND, N, cnt, st_checks, correct, N / 4, st_cycles / N);
    check(correct * 100 >= int'(MIN_ACC * (N / 4)), "prequential accuracy");
    finished = 1;
  end
endmodule
