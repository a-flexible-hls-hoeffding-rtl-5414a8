// leaf_trainer: the training update of one leaf, and the clearing of a new
// leaf.
//
// OP_TRAIN walks over every (feature d, quantile j) of the leaf, one per
// clock: it reads the estimate q_j of feature d and its below-count vector,
// adds one to the count of the sample's class when x[d] <= q_j, and writes
// back the estimate moved one asymmetric-signum step towards x (see
// quantile_update).  A last cycle adds one to the leaf's class count.
// OP_CLEAR writes the initial estimates and zero counts instead.  Counters
// saturate at 2^CW - 1.
//
// Interface: pulse start with op, node (flat node index), x and y.  The
// trainer owns the statistics read/write ports while busy.  done pulses
// D*NQ + 2 cycles after start.  What is counted per leaf follows the
// quantile-based Hoeffding tree the kernel implements; the memory layout,
// the visiting order and the saturation are this design's choices.
module leaf_trainer
  import ht_pkg::*;
#(
  parameter int unsigned NN = NT_DEF * ND_DEF,
  parameter int unsigned D  = D_DEF,
  parameter int unsigned K  = K_DEF,
  parameter int unsigned NQ = NQ_DEF,
  localparam int unsigned NW = $clog2(NN),
  localparam int unsigned SW = $clog2(NN * D * NQ),
  localparam int unsigned DI = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned QI = $clog2(NQ)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  train_op_e            op,
  input  logic [NW-1:0]        node,
  input  feat_t [D-1:0]        x,
  input  cls_t                 y,
  output logic                 busy,
  output logic                 done,
  // statistics ports
  output logic [SW-1:0]        q_raddr,
  input  feat_t                q_rdata,
  output logic                 q_we,
  output logic [SW-1:0]        q_waddr,
  output feat_t                q_wdata,
  output logic [SW-1:0]        b_raddr,
  input  logic [K-1:0][CW-1:0] b_rdata,
  output logic                 b_we,
  output logic [SW-1:0]        b_waddr,
  output logic [K-1:0][CW-1:0] b_wdata,
  output logic [NW-1:0]        cc_raddr,
  input  logic [K-1:0][CW-1:0] cc_rdata,
  output logic                 cc_we,
  output logic [NW-1:0]        cc_waddr,
  output logic [K-1:0][CW-1:0] cc_wdata
);
  typedef enum logic [1:0] {S_IDLE, S_STAT, S_CLASS} state_e;
  state_e        state;
  train_op_e     op_r;
  logic [NW-1:0] node_r;
  feat_t [D-1:0] x_r;
  cls_t          y_r;
  logic [DI-1:0] d_r;
  logic [QI-1:0] j_r;

  localparam logic [CW-1:0] CMAX = '1;

  logic [SW-1:0] saddr;
  assign saddr    = SW'((32'(node_r) * D + 32'(d_r)) * NQ + 32'(j_r));
  assign q_raddr  = saddr;
  assign b_raddr  = saddr;
  assign q_waddr  = saddr;
  assign b_waddr  = saddr;
  assign cc_raddr = node_r;
  assign cc_waddr = node_r;
  assign busy     = (state != S_IDLE);

  feat_t q_step;
  logic  below;
  quantile_update #(.NQ(NQ)) u_q (
    .x(x_r[d_r]), .q(q_rdata), .j(j_r), .q_next(q_step), .below(below)
  );

  always_comb begin
    q_we     = (state == S_STAT);
    b_we     = (state == S_STAT);
    cc_we    = (state == S_CLASS);
    q_wdata  = q_step;
    b_wdata  = b_rdata;
    cc_wdata = cc_rdata;
    if (op_r == OP_CLEAR) begin
      q_wdata  = quantile_init(32'(j_r), NQ);
      b_wdata  = '0;
      cc_wdata = '0;
    end else begin
      if (below && b_rdata[y_r] != CMAX) b_wdata[y_r] = b_rdata[y_r] + 1'b1;
      if (cc_rdata[y_r] != CMAX)         cc_wdata[y_r] = cc_rdata[y_r] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      op_r   <= OP_TRAIN;
      node_r <= '0;
      x_r    <= '0;
      y_r    <= '0;
      d_r    <= '0;
      j_r    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          op_r   <= op;
          node_r <= node;
          x_r    <= x;
          y_r    <= y;
          d_r    <= '0;
          j_r    <= '0;
          state  <= S_STAT;
        end
        S_STAT: begin
          if (j_r == QI'(NQ - 1)) begin
            j_r <= '0;
            if (d_r == DI'(D - 1)) state <= S_CLASS;
            else                    d_r   <= d_r + 1'b1;
          end else begin
            j_r <= j_r + 1'b1;
          end
        end
        S_CLASS: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
