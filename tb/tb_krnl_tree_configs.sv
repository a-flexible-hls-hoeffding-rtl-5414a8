// tb_krnl_tree_configs: the other kernel configurations of the resource
// study, each on a shorter clustered stream than the 40k-sample benchmark:
//   D = 100 features (K = 5, 100 nodes), K = 10 classes (D = 3, 100 nodes)
//   and 1000 nodes (D = 3, K = 5).
// The three kernels run side by side; each is checked by tb_cfg_run.
module tb_krnl_tree_configs;
  logic f0, f1, f2;
  int c0, c1, c2, e0, e1, e2;

  tb_cfg_run #(.D(100), .K(5),  .ND(100),  .N(4000), .MIN_ACC(40)) u_d100  (.finished(f0), .checks(c0), .failures(e0));
  tb_cfg_run #(.D(3),   .K(10), .ND(100),  .N(8000), .MIN_ACC(60)) u_k10   (.finished(f1), .checks(c1), .failures(e1));
  tb_cfg_run #(.D(3),   .K(5),  .ND(1000), .N(8000), .MIN_ACC(60)) u_nd1000(.finished(f2), .checks(c2), .failures(e2));

  initial begin
    #200ms;
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
