// tree_memory: storage of the tree objects the kernel works on.
//
// NT trees of up to ND nodes each are held side by side; node n of tree t
// sits at the flat index t*ND + n, so the same kernel serves any of them
// (one tree per call, chosen by the caller).  Four arrays make up a tree:
//   * the node table, one node_t per node;
//   * the class counts of each leaf, a K-vector of CW-bit counters;
//   * the quantile estimates, one per (node, feature, quantile) at index
//     (node*D + d)*NQ + j;
//   * the below counts, per (node, feature, quantile) a K-vector counting
//     the samples of each class that fell on the true side (x <= q_j).
// Statistics are kept for every node slot, as a node may become a leaf.
//
// Reads are combinational (distributed-RAM style); writes happen on the
// rising clock edge.  The node table has three read ports (tree sorter,
// controller, host) and the class counts two (sorter, trainer/evaluator),
// the statistics arrays one read and one write port each.  A write and a
// read of the same word in one cycle return the old word.  The memories are
// not reset: the controller clears a tree before it is used.
module tree_memory
  import ht_pkg::*;
#(
  parameter int unsigned NN = NT_DEF * ND_DEF,   // node slots over all trees
  parameter int unsigned D  = D_DEF,
  parameter int unsigned K  = K_DEF,
  parameter int unsigned NQ = NQ_DEF,
  localparam int unsigned NW = $clog2(NN),
  localparam int unsigned SW = $clog2(NN * D * NQ)
) (
  input  logic                  clk,
  // node table
  input  logic [NW-1:0]         nd_ra_addr,
  output node_t                 nd_ra_data,
  input  logic [NW-1:0]         nd_rb_addr,
  output node_t                 nd_rb_data,
  input  logic [NW-1:0]         nd_rh_addr,
  output node_t                 nd_rh_data,
  input  logic                  nd_we,
  input  logic [NW-1:0]         nd_waddr,
  input  node_t                 nd_wdata,
  // leaf class counts
  input  logic [NW-1:0]         cc_ra_addr,
  output logic [K-1:0][CW-1:0]  cc_ra_data,
  input  logic [NW-1:0]         cc_rb_addr,
  output logic [K-1:0][CW-1:0]  cc_rb_data,
  input  logic                  cc_we,
  input  logic [NW-1:0]         cc_waddr,
  input  logic [K-1:0][CW-1:0]  cc_wdata,
  // quantile estimates
  input  logic [SW-1:0]         q_raddr,
  output feat_t                 q_rdata,
  input  logic                  q_we,
  input  logic [SW-1:0]         q_waddr,
  input  feat_t                 q_wdata,
  // below counts
  input  logic [SW-1:0]         b_raddr,
  output logic [K-1:0][CW-1:0]  b_rdata,
  input  logic                  b_we,
  input  logic [SW-1:0]         b_waddr,
  input  logic [K-1:0][CW-1:0]  b_wdata
);
  node_t                nodes [NN];
  logic [K-1:0][CW-1:0] ccnt  [NN];
  feat_t                qmem  [NN*D*NQ];
  logic [K-1:0][CW-1:0] bmem  [NN*D*NQ];

  always_ff @(posedge clk) begin
    if (nd_we) nodes[nd_waddr] <= nd_wdata;
    if (cc_we) ccnt[cc_waddr]  <= cc_wdata;
    if (q_we)  qmem[q_waddr]   <= q_wdata;
    if (b_we)  bmem[b_waddr]   <= b_wdata;
  end

  assign nd_ra_data = nodes[nd_ra_addr];
  assign nd_rb_data = nodes[nd_rb_addr];
  assign nd_rh_data = nodes[nd_rh_addr];
  assign cc_ra_data = ccnt[cc_ra_addr];
  assign cc_rb_data = ccnt[cc_rb_addr];
  assign q_rdata    = qmem[q_raddr];
  assign b_rdata    = bmem[b_raddr];
endmodule
