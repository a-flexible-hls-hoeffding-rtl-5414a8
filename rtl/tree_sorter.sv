// tree_sorter: the inference path.  Sorts one sample from the root of a tree
// down to its leaf and predicts the leaf's majority class.
//
// One tree level per clock: the node table is read combinationally, an inner
// node sends the sample to child `left` when x[feat] <= thr and to
// `left + 1` otherwise (child indices count from the tree's root, so a tree
// can be moved to another slot unchanged), and a leaf ends the walk.  In the following cycle the leaf's
// class counts are read and the class with the largest count (lowest index
// on a tie) is taken; a leaf that has not yet counted a sample predicts the
// class stored in its node record, set when its parent split.  This walk is
// inherently sequential, one level after another, and is what limits the
// whole kernel.
//
// Interface: pulse start with root (flat node index of the tree's root) and
// the sample's features x; done pulses with leaf, pred and depth (the number
// of inner nodes passed).  Latency from the clock edge that samples start to the one that raises
// done is depth + 3 cycles.
// The `x <= thr` means true/left convention follows the printed split labels
// of the reference tree plots; the flat child numbering (right = left + 1)
// and the counts-first prediction rule are this design's choices.
module tree_sorter
  import ht_pkg::*;
#(
  parameter int unsigned NN = NT_DEF * ND_DEF,
  parameter int unsigned D  = D_DEF,
  parameter int unsigned K  = K_DEF,
  localparam int unsigned NW = $clog2(NN)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [NW-1:0]        root,
  input  feat_t [D-1:0]        x,
  output logic                 busy,
  output logic                 done,
  output logic [NW-1:0]        leaf,
  output cls_t                 pred,
  output logic [15:0]          depth,
  // node table and class-count read ports
  output logic [NW-1:0]        nd_addr,
  input  node_t                nd_data,
  output logic [NW-1:0]        cc_addr,
  input  logic [K-1:0][CW-1:0] cc_data
);
  typedef enum logic [1:0] {S_IDLE, S_WALK, S_PRED} state_e;
  state_e state;
  logic [NW-1:0] cur, root_r;
  feat_t [D-1:0] x_r;

  assign nd_addr = cur;
  assign cc_addr = cur;
  assign busy    = (state != S_IDLE);

  // Majority class of the current leaf.
  cls_t       best_k;
  logic [CW-1:0] best_c;
  always_comb begin
    best_k = nd_data.cls;
    best_c = '0;
    for (int k = 0; k < K; k++) begin
      if (cc_data[k] > best_c) begin
        best_c = cc_data[k];
        best_k = cls_t'(k);
      end
    end
  end

  feat_t xsel;
  always_comb xsel = x_r[nd_data.feat[$clog2(D > 1 ? D : 2)-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      root_r <= '0;
      x_r   <= '0;
      done  <= 1'b0;
      leaf  <= '0;
      pred  <= '0;
      depth <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cur   <= root;
          root_r <= root;
          x_r   <= x;
          depth <= '0;
          state <= S_WALK;
        end
        S_WALK: begin
          if (nd_data.is_leaf) begin
            state <= S_PRED;
          end else begin
            cur   <= root_r + ((xsel <= nd_data.thr) ? NW'(nd_data.left) : NW'(nd_data.left + 1'b1));
            depth <= depth + 1'b1;
          end
        end
        S_PRED: begin
          leaf  <= cur;
          pred  <= best_k;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
