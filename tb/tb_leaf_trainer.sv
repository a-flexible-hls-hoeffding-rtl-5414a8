// tb_leaf_trainer: clears two leaves, then trains them on random samples.
// After every operation the whole statistics memory is compared with a
// reference model kept here (quantile steps of lambda*p_j up and
// lambda*(1-p_j) down, below counts and class counts), which also checks
// that other nodes are left alone.  The latency D*NQ + 2 is checked too.
module tb_leaf_trainer;
  import ht_pkg::*;
  localparam int unsigned NN = 4, D = 2, K = 3, NQ = 4;
  localparam int unsigned NW = 2, SW = 5, NS = NN * D * NQ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  train_op_e op;
  logic [NW-1:0] node;
  feat_t [D-1:0] x;
  cls_t y;
  logic [SW-1:0] q_raddr, q_waddr, b_raddr, b_waddr;
  feat_t q_rdata, q_wdata;
  logic q_we, b_we, cc_we;
  logic [K-1:0][CW-1:0] b_rdata, b_wdata, cc_rdata, cc_wdata;
  logic [NW-1:0] cc_raddr, cc_waddr;

  feat_t qm [NS];
  logic [K-1:0][CW-1:0] bm [NS];
  logic [K-1:0][CW-1:0] cm [NN];
  assign q_rdata  = qm[q_raddr];
  assign b_rdata  = bm[b_raddr];
  assign cc_rdata = cm[cc_raddr];
  always_ff @(posedge clk) begin
    if (q_we)  qm[q_waddr]  <= q_wdata;
    if (b_we)  bm[b_waddr]  <= b_wdata;
    if (cc_we) cm[cc_waddr] <= cc_wdata;
  end

  leaf_trainer #(.NN(NN), .D(D), .K(K), .NQ(NQ)) dut (.*);

  // reference model
  int rq [NS];
  int rb [NS][K];
  int rc [NN][K];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(train_op_e o, int n);
    int cyc;
    @(negedge clk);
    op = o; node = NW'(n); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != D * NQ + 2) begin failures++; $display("latency %0d", cyc); end
  endtask

  task automatic compare(string what);
    int bad = 0;
    for (int i = 0; i < NS; i++) begin
      if (int'(qm[i]) != rq[i]) begin bad++; end
      for (int k = 0; k < K; k++) if (int'(bm[i][k]) != rb[i][k]) bad++;
    end
    for (int n = 0; n < NN; n++) for (int k = 0; k < K; k++) if (int'(cm[n][k]) != rc[n][k]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d words differ", what, bad); end
  endtask

  initial begin
    // hold reset for a few cycles before filling the memories, so that no
    // write from the trainer's unreset state can land in them
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      qm[i] = feat_t'($urandom); rq[i] = int'(qm[i]);
      for (int k = 0; k < K; k++) begin bm[i][k] = CW'($urandom_range(0, 50)); rb[i][k] = int'(bm[i][k]); end
    end
    for (int n = 0; n < NN; n++) for (int k = 0; k < K; k++) begin
      cm[n][k] = CW'($urandom_range(0, 50)); rc[n][k] = int'(cm[n][k]);
    end
    for (int n = 1; n <= 2; n++) begin
      run(OP_CLEAR, n);
      for (int d = 0; d < D; d++) for (int j = 0; j < NQ; j++) begin
        rq[(n*D + d)*NQ + j] = ((j + 1) * 65536) / (NQ + 1);
        for (int k = 0; k < K; k++) rb[(n*D + d)*NQ + j][k] = 0;
      end
      for (int k = 0; k < K; k++) rc[n][k] = 0;
      compare("clear");
    end
    for (int t = 0; t < 300; t++) begin
      automatic int n = 1 + (t % 2);
      for (int d = 0; d < D; d++) x[d] = feat_t'($urandom);
      y = cls_t'($urandom_range(0, K - 1));
      run(OP_TRAIN, n);
      for (int d = 0; d < D; d++) for (int j = 0; j < NQ; j++) begin
        automatic int a = (n*D + d)*NQ + j;
        automatic int up = (655 * (j + 1)) / (NQ + 1);
        if (int'(x[d]) <= rq[a]) begin
          rb[a][y]++;
          rq[a] = (rq[a] - (655 - up) < 0) ? 0 : rq[a] - (655 - up);
        end else begin
          rq[a] = (rq[a] + up > 65535) ? 65535 : rq[a] + up;
        end
      end
      rc[n][y]++;
      compare("train");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
