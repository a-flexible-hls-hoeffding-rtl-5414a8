// tb_quantile_update: checks one asymmetric-signum step against a reference
// computed here from lambda and the quantile levels, then streams uniform
// values through the estimator and checks that each estimate settles near
// its target quantile (j+1)/(NQ+1).
module tb_quantile_update;
  import ht_pkg::*;
  localparam int unsigned NQ = 16;

  int checks = 0, failures = 0;
  feat_t x, q, q_next;
  logic [3:0] j;
  logic below;

  quantile_update #(.NQ(NQ)) dut (.x, .q, .j, .q_next, .below);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_step(int xi, int qi, int ji);
    int lam = int'(0.01 * 65536.0);            // 655
    int up  = (lam * (ji + 1)) / (NQ + 1);
    int dn  = lam - up;
    int r;
    if (xi > qi) r = qi + up; else r = qi - dn;
    if (r < 0) r = 0;
    if (r > 65535) r = 65535;
    return r;
  endfunction

  initial begin
    // Single steps, including the saturation corners.
    for (int t = 0; t < 3000; t++) begin
      x = feat_t'($urandom);
      q = (t % 10 == 0) ? feat_t'($urandom_range(0, 700)) :
          (t % 10 == 1) ? feat_t'($urandom_range(65000, 65535)) : feat_t'($urandom);
      if (t % 7 == 0) x = q;
      j = 4'($urandom_range(0, NQ - 1));
      #1;
      checks++;
      if (int'(q_next) != ref_step(int'(x), int'(q), int'(j)) || below != (x <= q)) begin
        failures++;
        if (failures < 10) $display("step mismatch x=%0d q=%0d j=%0d got %0d/%0b want %0d",
                                    x, q, j, q_next, below, ref_step(int'(x), int'(q), int'(j)));
      end
    end
    // Convergence on a uniform stream.
    for (int jj = 0; jj < NQ; jj += 5) begin
      feat_t est;
      real target, acc;
      acc = 0.0;
      est = 16'd32768;
      target = real'(jj + 1) / real'(NQ + 1) * 65536.0;
      j = 4'(jj);
      for (int t = 0; t < 40000; t++) begin
        x = feat_t'($urandom);
        q = est;
        #1;
        est = q_next;
        if (t >= 20000) acc += real'(est);
      end
      // the mean of the estimate over the second half of the stream
      acc = acc / 20000.0;
      checks++;
      if ((acc - target) > 1500.0 || (target - acc) > 1500.0) begin
        failures++;
        $display("quantile %0d settled at %0f, target %0f", jj, acc, target);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
