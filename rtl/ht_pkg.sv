// ht_pkg: types and constants shared by the Hoeffding tree kernel.
//
// The default sizes are the kernel's main configuration: D = 3 features,
// K = 5 classes, at most Nd = 100 nodes per tree, 16 quantile estimates per
// feature and the learning constants delta = 0.001, lambda = 0.01,
// tau = 0.05, n_min = 200.  Everything numeric is fixed point (the reference
// implementation uses 32-bit floats): features and thresholds are unsigned
// fractions in [0,1) with FW bits, class counters are CW bits wide, and split
// scores carry FRAC fractional bits.  Widths of indices are fixed generously
// so that one node record type serves every configuration.
package ht_pkg;

  // Main configuration (D3, K5, Nd100) and learning constants.
  parameter int unsigned D_DEF    = 3;
  parameter int unsigned K_DEF    = 5;
  parameter int unsigned ND_DEF   = 100;
  parameter int unsigned NQ_DEF   = 16;
  parameter int unsigned NMIN_DEF = 200;
  parameter int unsigned NT_DEF   = 2;      // tree objects held side by side
  parameter int unsigned NS_DEF   = 40000;  // samples per kernel call

  parameter real DELTA  = 0.001;
  parameter real LAMBDA = 0.01;
  parameter real TAU    = 0.05;
  parameter real RANGE  = 1.0;              // range R of the Gini gain

  // Number formats.
  parameter int unsigned FW   = 16;         // feature / threshold width, Q0.FW
  parameter int unsigned CW   = 20;         // class counter width
  parameter int unsigned FRAC = 8;          // fraction bits of split scores

  // Index widths of the node record.
  parameter int unsigned FEAT_IW  = 8;      // up to 256 features
  parameter int unsigned NODE_IW  = 16;     // up to 65536 nodes over all trees
  parameter int unsigned CLASS_IW = 8;      // up to 256 classes

  // Quantile step lambda in Q0.FW.
  parameter int unsigned LAMBDA_FX = int'(LAMBDA * real'(1 << FW));

  // Hoeffding bound constant R^2 ln(1/delta) and the tie threshold tau^2,
  // both with 2*FRAC fraction bits.
  parameter longint unsigned HB_C_FX  = longint'(RANGE * RANGE * $ln(1.0 / DELTA) * real'(1 << (2 * FRAC)));
  parameter longint unsigned TAU2_FX  = longint'(TAU * TAU * real'(1 << (2 * FRAC)));

  typedef logic [FW-1:0]       feat_t;
  typedef logic [CW-1:0]       cnt_t;
  typedef logic [FEAT_IW-1:0]  fidx_t;
  typedef logic [NODE_IW-1:0]  nidx_t;
  typedef logic [CLASS_IW-1:0] cls_t;

  // One entry of the node table.  An inner node tests x[feat] <= thr and
  // goes to node `left` when true and to `left + 1` when false; both are
  // node numbers within the tree, counted from its root.  A leaf
  // predicts `cls` until it has seen samples of its own; n_since counts the
  // training samples since its last split check.
  typedef struct packed {
    logic  is_leaf;
    fidx_t feat;
    feat_t thr;
    nidx_t left;
    cls_t  cls;
    logic [15:0] n_since;
  } node_t;

  typedef enum logic [0:0] {OP_TRAIN = 1'b0, OP_CLEAR = 1'b1} train_op_e;

  // The four parts of a tree object, as seen through the kernel's host port.
  typedef enum logic [1:0] {
    TP_NODE = 2'd0,   // node records, indexed by node
    TP_CCNT = 2'd1,   // leaf class counts, indexed by node
    TP_QEST = 2'd2,   // quantile estimates, indexed by (node*D + d)*NQ + j
    TP_BCNT = 2'd3    // below counts, same index as the estimates
  } tree_part_e;

  // Initial value of quantile estimate j out of nq for a fresh leaf:
  // the (j+1)/(nq+1) quantile of a uniform distribution on [0,1).
  function automatic feat_t quantile_init(input int unsigned j, input int unsigned nq);
    return feat_t'(((j + 1) << FW) / (nq + 1));
  endfunction

endpackage
