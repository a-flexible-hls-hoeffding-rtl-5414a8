// tb_krnl_tree_workloads: the synthetic clustering benchmarks (K = 5
// clusters) run on kernels at the default sizes, each for training and then
// for inference over N samples:
//   D = 3,   N = 40000    (one call per phase)
//   D = 3,   N = 500000   (13 calls per phase, the tree kept between calls)
//   D = 100, N = 40000    (one call per phase)
// The fourth benchmark, D = 100 with N = 500000, differs from the third only
// in length and would take about twelve times as long; it is left out.
// Each kernel is driven and checked by tb_wl_run, which also prints the
// cycle totals as times at 103.6 MHz next to the reference board's times.
module tb_krnl_tree_workloads;
  logic f0, f1, f2;
  int c0, c1, c2, e0, e1, e2;

  tb_wl_run #(.D(3),   .N(40000),  .MIN_ACC(90), .PAPER_TRAIN_MS(1990),  .PAPER_INFER_MS(462))
    u_d3_40k   (.finished(f0), .checks(c0), .failures(e0));
  tb_wl_run #(.D(3),   .N(500000), .MIN_ACC(90), .PAPER_TRAIN_MS(30933), .PAPER_INFER_MS(11442))
    u_d3_500k  (.finished(f1), .checks(c1), .failures(e1));
  tb_wl_run #(.D(100), .N(40000),  .MIN_ACC(50), .PAPER_TRAIN_MS(51648), .PAPER_INFER_MS(469))
    u_d100_40k (.finished(f2), .checks(c2), .failures(e2));

  initial begin
    #3s;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
    $finish;
  end

  initial begin
    #1;  // the helpers clear their flags at time 0
    wait (f0 === 1'b1 && f1 === 1'b1 && f2 === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2);
    $finish;
  end
endmodule
