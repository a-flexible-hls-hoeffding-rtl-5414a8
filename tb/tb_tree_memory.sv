// tb_tree_memory: writes random words into the four arrays and checks every
// read port against a copy kept here, including that a read in the cycle of
// a write to the same word returns the old word.
module tb_tree_memory;
  import ht_pkg::*;
  localparam int unsigned NN = 8, D = 2, K = 3, NQ = 4;
  localparam int unsigned NW = 3, SW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NW-1:0] nd_ra_addr, nd_rb_addr, nd_rh_addr, nd_waddr, cc_ra_addr, cc_rb_addr, cc_waddr;
  node_t nd_ra_data, nd_rb_data, nd_rh_data, nd_wdata;
  logic nd_we = 0, cc_we = 0, q_we = 0, b_we = 0;
  logic [K-1:0][CW-1:0] cc_ra_data, cc_rb_data, cc_wdata, b_rdata, b_wdata;
  logic [SW-1:0] q_raddr, q_waddr, b_raddr, b_waddr;
  feat_t q_rdata, q_wdata;

  node_t mn [NN];
  logic [K-1:0][CW-1:0] mc [NN];
  feat_t mq [NN*D*NQ];
  logic [K-1:0][CW-1:0] mb [NN*D*NQ];

  tree_memory #(.NN(NN), .D(D), .K(K), .NQ(NQ)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("mismatch: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < NN*D*NQ; i++) begin
      @(negedge clk);
      nd_we = (i < NN); cc_we = (i < NN); q_we = 1; b_we = 1;
      nd_waddr = NW'(i); cc_waddr = NW'(i); q_waddr = SW'(i); b_waddr = SW'(i);
      nd_wdata = node_t'({$urandom, $urandom});
      cc_wdata = {$urandom, $urandom};
      q_wdata  = feat_t'($urandom);
      b_wdata  = {$urandom, $urandom};
      if (i < NN) begin mn[i] = nd_wdata; mc[i] = cc_wdata; end
      mq[i] = q_wdata; mb[i] = b_wdata;
    end
    @(negedge clk); nd_we = 0; cc_we = 0; q_we = 0; b_we = 0;
    for (int t = 0; t < 300; t++) begin
      automatic int a = $urandom_range(0, NN-1), b = $urandom_range(0, NN-1), h = $urandom_range(0, NN-1);
      automatic int s = $urandom_range(0, NN*D*NQ-1), s2 = $urandom_range(0, NN*D*NQ-1);
      @(negedge clk);
      nd_ra_addr = NW'(a); nd_rb_addr = NW'(b); nd_rh_addr = NW'(h);
      cc_ra_addr = NW'(a); cc_rb_addr = NW'(b); q_raddr = SW'(s); b_raddr = SW'(s2);
      // write the word being read on the q port: the read must see the old one
      q_we = 1; q_waddr = SW'(s); q_wdata = feat_t'($urandom);
      #1;
      check(nd_ra_data == mn[a] && nd_rb_data == mn[b] && nd_rh_data == mn[h], "node ports");
      check(cc_ra_data == mc[a] && cc_rb_data == mc[b], "class count ports");
      check(q_rdata == mq[s] && b_rdata == mb[s2], "statistics ports");
      @(posedge clk); #1;
      mq[s] = q_wdata;
      q_we = 0;
      check(q_rdata == mq[s], "quantile written");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
