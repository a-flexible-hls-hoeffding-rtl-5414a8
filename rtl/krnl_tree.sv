// krnl_tree: Hoeffding tree kernel for runtime learning.
//
// A Hoeffding tree is a decision tree that learns from a stream: each leaf
// keeps class statistics of the samples that reach it and splits as soon as
// the Hoeffding bound says that, with probability 1 - delta, the best split
// found so far is truly the best.  One call of this kernel works through an
// array of samples with one tree.  For each sample it
//   1. sorts the sample from the root to a leaf and writes the leaf's
//      majority class to the result array (inference), and then,
//   2. if the sample is flagged for training, updates that leaf's quantile
//      estimates and class counts (training).  Every n_min training samples
//      a leaf is evaluated for a split; if it splits, two new leaves are
//      allocated and cleared, as long as the tree has room for them (at most
//      ND nodes per tree).
// Samples are processed strictly one after the other, since every training
// step can change the tree the next sample is sorted through.
//
// The kernel holds NT tree objects.  A call names one of them (tree_id) and
// may reset it to a single empty leaf first (init_tree); otherwise the tree
// carries on from where the previous call left it, so a tree can keep
// learning over many calls and several trees can share the one kernel.
//
// Interface: the arguments tree_id, n_samples and init_tree are sampled when
// ap_start is seen in the idle state; ap_idle is high while idle and ap_done
// pulses at the end of the call.  The host fills the sample array through
// hs_* and reads classifications through hr_*.  Through hx_* it reads and,
// between calls, writes any word of any tree object (node records, class
// counts, quantile estimates, below counts; hx_addr indexes within the tree
// hx_tree, reads are combinational) and its node count, so trees can be
// saved, loaded from software and exchanged.  These host ports stand in for
// the memory-mapped buffers of the original system.  Statistics counters report
// what the last call did and how many cycles it took.
//
// Timing per sample: 2 cycles to fetch, depth + 2 to sort, 1 to write the
// result; a training sample adds D*NQ + 3 cycles, a split check about
// D*NQ*(2*DVW + 5) cycles and a split 2*(D*NQ + 3) + 3 cycles, where DVW is
// the split evaluator's divider width.  The algorithm, its parameters and
// the infer-then-train order follow the reference kernel; fixed point in
// place of 32-bit floats, on-chip tree storage and the host ports are this
// design's choices.
module krnl_tree
  import ht_pkg::*;
#(
  parameter int unsigned D    = D_DEF,
  parameter int unsigned K    = K_DEF,
  parameter int unsigned ND   = ND_DEF,
  parameter int unsigned NQ   = NQ_DEF,
  parameter int unsigned NMIN = NMIN_DEF,
  parameter int unsigned NT   = NT_DEF,
  parameter int unsigned NS   = NS_DEF,
  localparam int unsigned NN  = NT * ND,
  localparam int unsigned NW  = $clog2(NN),
  localparam int unsigned TW  = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned CNW = $clog2(ND + 1),
  localparam int unsigned AW  = $clog2(NS),
  localparam int unsigned SW  = $clog2(NN * D * NQ),
  localparam int unsigned XW  = ($bits(node_t) > K * CW) ? $bits(node_t) : K * CW
) (
  input  logic           clk,
  input  logic           rst_n,
  // kernel control and arguments
  input  logic           ap_start,
  output logic           ap_idle,
  output logic           ap_done,
  input  logic [TW-1:0]  tree_id,
  input  logic [AW:0]    n_samples,
  input  logic           init_tree,
  // host access to the sample array
  input  logic           hs_we,
  input  logic [AW-1:0]  hs_addr,
  input  feat_t [D-1:0]  hs_x,
  input  cls_t           hs_label,
  input  logic           hs_train,
  // host access to the result array
  input  logic           hr_en,
  input  logic [AW-1:0]  hr_addr,
  output cls_t           hr_pred,
  output logic           hr_trained,
  // host access to the tree objects (writes only while idle)
  input  logic [TW-1:0]  hx_tree,
  input  tree_part_e     hx_part,
  input  logic [SW-1:0]  hx_addr,
  output logic [XW-1:0]  hx_rdata,
  input  logic           hx_we,
  input  logic [XW-1:0]  hx_wdata,
  output logic [CNW-1:0] hx_count,
  input  logic           hx_count_we,
  input  logic [CNW-1:0] hx_count_wdata,
  // statistics of the last call
  output logic [31:0]    st_cycles,
  output logic [31:0]    st_inferred,
  output logic [31:0]    st_trained,
  output logic [31:0]    st_checks,
  output logic [31:0]    st_splits,
  output logic [31:0]    st_full
);
  typedef enum logic [4:0] {
    S_IDLE, S_INIT, S_INIT_W, S_FETCH, S_FETCH_W, S_SORT, S_SORT_W, S_TRAIN_W,
    S_BUMP, S_EVAL_W, S_SPLIT_P, S_SPLIT_L, S_CLEAR_L_W, S_SPLIT_R,
    S_CLEAR_R_W, S_NEXT, S_DONE
  } state_e;
  state_e state;

  logic [TW-1:0]  tree_r;
  logic [NW-1:0]  base_r;
  logic [AW:0]    n_r, i_r;
  logic [NW-1:0]  leaf_r, left_r;
  logic [CNW-1:0] count_r [NT];

  // sorter outputs, also used by the result buffer
  logic          so_start, so_busy, so_done;
  logic [NW-1:0] so_leaf;
  cls_t          so_pred;
  logic [15:0]   so_depth;

  // ---------------------------------------------------------------- buffers
  logic           sb_rd;
  feat_t [D-1:0]  s_x;
  cls_t           s_label;
  logic           s_train;
  sample_buffer #(.D(D), .DEPTH(NS)) u_samples (
    .clk,
    .wr_en(hs_we), .wr_addr(hs_addr), .wr_x(hs_x), .wr_label(hs_label), .wr_train(hs_train),
    .rd_en(sb_rd), .rd_addr(i_r[AW-1:0]), .rd_x(s_x), .rd_label(s_label), .rd_train(s_train)
  );

  logic rb_we;
  result_buffer #(.DEPTH(NS)) u_results (
    .clk,
    .wr_en(rb_we), .wr_addr(i_r[AW-1:0]), .wr_pred(so_pred), .wr_trained(s_train),
    .rd_en(hr_en), .rd_addr(hr_addr), .rd_pred(hr_pred), .rd_trained(hr_trained)
  );

  // ------------------------------------------------------------ tree memory
  // Host view: index hx_addr within tree hx_tree.
  logic [NW-1:0]  hx_node;
  logic [SW-1:0]  hx_stat;
  node_t          hx_node_data;
  logic           hx_wr;
  assign hx_node = NW'(32'(hx_tree) * ND + 32'(hx_addr));
  assign hx_stat = SW'(32'(hx_tree) * ND * D * NQ + 32'(hx_addr));
  assign hx_wr   = hx_we && (state == S_IDLE);

  logic [NW-1:0]        nd_ra_addr, nd_rb_addr, nd_waddr;
  node_t                nd_ra_data, nd_rb_data, nd_wdata;
  logic                 nd_we;
  logic [NW-1:0]        cc_ra_addr, cc_rb_addr, cc_waddr;
  logic [K-1:0][CW-1:0] cc_ra_data, cc_rb_data, cc_wdata;
  logic                 cc_we;
  logic [SW-1:0]        q_raddr, q_waddr, b_raddr, b_waddr;
  feat_t                q_rdata, q_wdata;
  logic [K-1:0][CW-1:0] b_rdata, b_wdata;
  logic                 q_we, b_we;

  tree_memory #(.NN(NN), .D(D), .K(K), .NQ(NQ)) u_mem (
    .clk,
    .nd_ra_addr, .nd_ra_data, .nd_rb_addr, .nd_rb_data,
    .nd_rh_addr(hx_node), .nd_rh_data(hx_node_data),
    .nd_we, .nd_waddr, .nd_wdata,
    .cc_ra_addr, .cc_ra_data, .cc_rb_addr, .cc_rb_data, .cc_we, .cc_waddr, .cc_wdata,
    .q_raddr, .q_rdata, .q_we, .q_waddr, .q_wdata,
    .b_raddr, .b_rdata, .b_we, .b_waddr, .b_wdata
  );
  assign hx_count = count_r[hx_tree];

  // ---------------------------------------------------------------- sorter
  tree_sorter #(.NN(NN), .D(D), .K(K)) u_sorter (
    .clk, .rst_n, .start(so_start), .root(base_r), .x(s_x),
    .busy(so_busy), .done(so_done), .leaf(so_leaf), .pred(so_pred), .depth(so_depth),
    .nd_addr(nd_ra_addr), .nd_data(nd_ra_data), .cc_addr(cc_ra_addr), .cc_data(cc_ra_data)
  );

  // --------------------------------------------------------------- trainer
  logic          tr_start, tr_busy, tr_done;
  train_op_e     tr_op;
  logic [NW-1:0] tr_node;
  logic [SW-1:0] tr_q_raddr, tr_b_raddr;
  logic [NW-1:0] tr_cc_raddr, tr_cc_waddr;
  logic          tr_q_we, tr_b_we, tr_cc_we;
  logic [SW-1:0] tr_q_waddr, tr_b_waddr;
  feat_t         tr_q_wdata;
  logic [K-1:0][CW-1:0] tr_b_wdata, tr_cc_wdata;
  leaf_trainer #(.NN(NN), .D(D), .K(K), .NQ(NQ)) u_trainer (
    .clk, .rst_n, .start(tr_start), .op(tr_op), .node(tr_node), .x(s_x), .y(s_label),
    .busy(tr_busy), .done(tr_done),
    .q_raddr(tr_q_raddr), .q_rdata, .q_we(tr_q_we), .q_waddr(tr_q_waddr), .q_wdata(tr_q_wdata),
    .b_raddr(tr_b_raddr), .b_rdata, .b_we(tr_b_we), .b_waddr(tr_b_waddr), .b_wdata(tr_b_wdata),
    .cc_raddr(tr_cc_raddr), .cc_rdata(cc_rb_data), .cc_we(tr_cc_we), .cc_waddr(tr_cc_waddr),
    .cc_wdata(tr_cc_wdata)
  );

  // ------------------------------------------------------------- evaluator
  logic          ev_start, ev_busy, ev_done, ev_split;
  fidx_t         ev_feat;
  feat_t         ev_thr;
  cls_t          ev_cls_l, ev_cls_r;
  logic [SW-1:0] ev_q_raddr, ev_b_raddr;
  logic [NW-1:0] ev_cc_raddr;
  split_evaluator #(.NN(NN), .D(D), .K(K), .NQ(NQ)) u_eval (
    .clk, .rst_n, .start(ev_start), .node(leaf_r),
    .busy(ev_busy), .done(ev_done), .do_split(ev_split), .feat(ev_feat), .thr(ev_thr),
    .cls_l(ev_cls_l), .cls_r(ev_cls_r), .score_best(), .score_second(),
    .cc_raddr(ev_cc_raddr), .cc_rdata(cc_rb_data),
    .q_raddr(ev_q_raddr), .q_rdata, .b_raddr(ev_b_raddr), .b_rdata
  );

  // The statistics read ports belong to the host while the kernel is idle,
  // otherwise to whichever of trainer and evaluator is busy (the controller
  // never runs both at once).  The write ports belong to the trainer, or to
  // the host while idle.
  always_comb begin
    q_raddr    = ap_idle ? hx_stat : ev_busy ? ev_q_raddr  : tr_q_raddr;
    b_raddr    = ap_idle ? hx_stat : ev_busy ? ev_b_raddr  : tr_b_raddr;
    cc_rb_addr = ap_idle ? hx_node : ev_busy ? ev_cc_raddr : tr_cc_raddr;
    q_we       = tr_q_we;
    q_waddr    = tr_q_waddr;
    q_wdata    = tr_q_wdata;
    b_we       = tr_b_we;
    b_waddr    = tr_b_waddr;
    b_wdata    = tr_b_wdata;
    cc_we      = tr_cc_we;
    cc_waddr   = tr_cc_waddr;
    cc_wdata   = tr_cc_wdata;
    if (hx_wr) begin
      q_we     = (hx_part == TP_QEST);
      q_waddr  = hx_stat;
      q_wdata  = hx_wdata[FW-1:0];
      b_we     = (hx_part == TP_BCNT);
      b_waddr  = hx_stat;
      b_wdata  = hx_wdata[K*CW-1:0];
      cc_we    = (hx_part == TP_CCNT);
      cc_waddr = hx_node;
      cc_wdata = hx_wdata[K*CW-1:0];
    end
    case (hx_part)
      TP_NODE: hx_rdata = XW'(hx_node_data);
      TP_CCNT: hx_rdata = XW'(cc_rb_data);
      TP_QEST: hx_rdata = XW'(q_rdata);
      default: hx_rdata = XW'(b_rdata);
    endcase
  end

  // ------------------------------------------------------------ controller
  assign nd_rb_addr = leaf_r;
  assign ap_idle    = (state == S_IDLE);

  logic [15:0]    n_since_next;
  logic [CNW-1:0] count_cur;
  assign n_since_next = nd_rb_data.n_since + 1'b1;
  assign count_cur    = count_r[tree_r];

  always_comb begin
    sb_rd    = (state == S_FETCH) && (i_r != n_r);
    rb_we    = (state == S_SORT_W) && so_done;
    nd_we    = 1'b0;
    nd_waddr = leaf_r;
    nd_wdata = nd_rb_data;
    case (state)
      S_INIT: begin
        nd_we    = 1'b1;
        nd_waddr = base_r;
        nd_wdata = '{is_leaf: 1'b1, feat: '0, thr: '0, left: '0, cls: '0, n_since: '0};
      end
      S_BUMP: begin
        nd_we            = 1'b1;
        nd_wdata.n_since = (32'(n_since_next) >= NMIN) ? '0 : n_since_next;
      end
      S_SPLIT_P: begin
        nd_we    = 1'b1;
        nd_wdata = '{is_leaf: 1'b0, feat: ev_feat, thr: ev_thr, left: nidx_t'(count_cur),
                     cls: nd_rb_data.cls, n_since: '0};
      end
      S_SPLIT_L: begin
        nd_we    = 1'b1;
        nd_waddr = left_r;
        nd_wdata = '{is_leaf: 1'b1, feat: '0, thr: '0, left: '0, cls: ev_cls_l, n_since: '0};
      end
      S_SPLIT_R: begin
        nd_we    = 1'b1;
        nd_waddr = left_r + 1'b1;
        nd_wdata = '{is_leaf: 1'b1, feat: '0, thr: '0, left: '0, cls: ev_cls_r, n_since: '0};
      end
      S_IDLE: begin
        nd_we    = hx_wr && (hx_part == TP_NODE);
        nd_waddr = hx_node;
        nd_wdata = node_t'(hx_wdata[$bits(node_t)-1:0]);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      tree_r   <= '0;
      base_r   <= '0;
      n_r      <= '0;
      i_r      <= '0;
      leaf_r   <= '0;
      left_r   <= '0;
      so_start <= 1'b0;
      tr_start <= 1'b0;
      tr_op    <= OP_TRAIN;
      tr_node  <= '0;
      ev_start <= 1'b0;
      ap_done  <= 1'b0;
      for (int t = 0; t < NT; t++) count_r[t] <= '0;
      st_cycles   <= '0;
      st_inferred <= '0;
      st_trained  <= '0;
      st_checks   <= '0;
      st_splits   <= '0;
      st_full     <= '0;
    end else begin
      so_start <= 1'b0;
      tr_start <= 1'b0;
      ev_start <= 1'b0;
      ap_done  <= 1'b0;
      if (state != S_IDLE) st_cycles <= st_cycles + 1'b1;
      if (hx_count_we && state == S_IDLE) count_r[hx_tree] <= hx_count_wdata;
      case (state)
        S_IDLE: if (ap_start) begin
          tree_r      <= tree_id;
          base_r      <= NW'(32'(tree_id) * ND);
          n_r         <= n_samples;
          i_r         <= '0;
          st_cycles   <= 32'd1;
          st_inferred <= '0;
          st_trained  <= '0;
          st_checks   <= '0;
          st_splits   <= '0;
          st_full     <= '0;
          state       <= init_tree ? S_INIT : S_FETCH;
        end
        S_INIT: begin
          count_r[tree_r] <= CNW'(1);
          tr_op    <= OP_CLEAR;
          tr_node  <= base_r;
          tr_start <= 1'b1;
          state    <= S_INIT_W;
        end
        S_INIT_W: if (tr_done) state <= S_FETCH;
        S_FETCH: state <= (i_r == n_r) ? S_DONE : S_FETCH_W;
        S_FETCH_W: begin
          so_start <= 1'b1;
          state    <= S_SORT;
        end
        S_SORT: state <= S_SORT_W;
        S_SORT_W: if (so_done) begin
          leaf_r      <= so_leaf;
          st_inferred <= st_inferred + 1'b1;
          if (s_train) begin
            tr_op    <= OP_TRAIN;
            tr_node  <= so_leaf;
            tr_start <= 1'b1;
            state    <= S_TRAIN_W;
          end else begin
            state <= S_NEXT;
          end
        end
        S_TRAIN_W: if (tr_done) begin
          st_trained <= st_trained + 1'b1;
          state      <= S_BUMP;
        end
        S_BUMP: begin
          state <= S_NEXT;
          if (32'(n_since_next) >= NMIN) begin
            if (32'(count_cur) + 2 <= ND) begin
              ev_start  <= 1'b1;
              st_checks <= st_checks + 1'b1;
              state     <= S_EVAL_W;
            end else begin
              st_full <= st_full + 1'b1;
            end
          end
        end
        S_EVAL_W: if (ev_done) begin
          left_r <= NW'(32'(base_r) + 32'(count_cur));
          state  <= ev_split ? S_SPLIT_P : S_NEXT;
        end
        S_SPLIT_P: state <= S_SPLIT_L;
        S_SPLIT_L: begin
          tr_op    <= OP_CLEAR;
          tr_node  <= left_r;
          tr_start <= 1'b1;
          state    <= S_CLEAR_L_W;
        end
        S_CLEAR_L_W: if (tr_done) state <= S_SPLIT_R;
        S_SPLIT_R: begin
          tr_op    <= OP_CLEAR;
          tr_node  <= left_r + 1'b1;
          tr_start <= 1'b1;
          state    <= S_CLEAR_R_W;
        end
        S_CLEAR_R_W: if (tr_done) begin
          count_r[tree_r] <= count_cur + CNW'(2);
          st_splits       <= st_splits + 1'b1;
          state           <= S_NEXT;
        end
        S_NEXT: begin
          i_r   <= i_r + 1'b1;
          state <= S_FETCH;
        end
        S_DONE: begin
          ap_done <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The statistics ports are never claimed by trainer and evaluator at once.
  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n) !(tr_busy && ev_busy));
  // The host writes tree objects only between calls.
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) (hx_we || hx_count_we) |-> ap_idle);
endmodule
