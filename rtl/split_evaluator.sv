// split_evaluator: decides whether a leaf should split, and how.
//
// Every candidate split "x[d] <= q_j" of the leaf (one per feature d and
// quantile estimate j) is scored by its Gini gain.  With class counts c_k
// (n samples) at the leaf and c_k^L = below count, c_k^R = c_k - c_k^L on
// the two sides, n times the Gini gain of a candidate is
//     S - S0,  S = sum_k (c_k^L)^2 / n_L + sum_k (c_k^R)^2 / n_R,
//              S0 = sum_k c_k^2 / n,
// so candidates are ranked by S alone.  The best candidate of each feature
// competes; X is the best feature and Y the runner-up (or "no split", S0,
// if that scores higher or there is one feature).  With
// dG = (S_X - S_Y) / n, the Hoeffding bound eps = sqrt(R^2 ln(1/delta)/(2n))
// is tested without a square root:
//     dG > eps   <=>  2 (S_X - S_Y)^2 > R^2 ln(1/delta) * n
//     eps < tau  <=>  R^2 ln(1/delta) < 2 n tau^2          (tie breaking)
// and the leaf splits when either holds and X beats "no split".  The two new
// leaves inherit the majority class of their side of the split.
//
// Timing: one shared sequential divider (FRAC fraction bits on every
// quotient); about 2*(DVW+2)+1 cycles per candidate, D*NQ candidates, plus
// one division for S0.  Pulse start with node; done pulses with the
// decision.  The Hoeffding test, delta and tau follow the reference design;
// the choice of the Gini gain (the reference only names a gain function G;
// its tree plots print Gini values), R = 1, the fixed-point scores and the
// "must beat no split" rule are this design's.
module split_evaluator
  import ht_pkg::*;
#(
  parameter int unsigned NN = NT_DEF * ND_DEF,
  parameter int unsigned D  = D_DEF,
  parameter int unsigned K  = K_DEF,
  parameter int unsigned NQ = NQ_DEF,
  localparam int unsigned NW  = $clog2(NN),
  localparam int unsigned SW  = $clog2(NN * D * NQ),
  localparam int unsigned DI  = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned QI  = $clog2(NQ),
  localparam int unsigned NBW = CW + $clog2(K) + 1,          // sample count
  localparam int unsigned SQW = 2 * CW + $clog2(K) + 1,      // sum of squares
  localparam int unsigned DVW = SQW + FRAC,                  // dividend
  localparam int unsigned SCW = DVW + 1,                     // score
  localparam int unsigned MW  = 2 * SCW + 66                 // bound products
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [NW-1:0]        node,
  output logic                 busy,
  output logic                 done,
  output logic                 do_split,
  output fidx_t                feat,
  output feat_t                thr,
  output cls_t                 cls_l,
  output cls_t                 cls_r,
  output logic [SCW-1:0]       score_best,
  output logic [SCW-1:0]       score_second,
  // statistics read ports
  output logic [NW-1:0]        cc_raddr,
  input  logic [K-1:0][CW-1:0] cc_rdata,
  output logic [SW-1:0]        q_raddr,
  input  feat_t                q_rdata,
  output logic [SW-1:0]        b_raddr,
  input  logic [K-1:0][CW-1:0] b_rdata
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_NULL, S_NULL_W, S_LEFT, S_LEFT_W, S_RIGHT, S_RIGHT_W, S_ACC,
    S_MERGE, S_DECIDE
  } state_e;
  state_e state;

  logic [NW-1:0] node_r;
  logic [DI-1:0] d_r;
  logic [QI-1:0] j_r;

  assign cc_raddr = node_r;
  assign q_raddr  = SW'((32'(node_r) * D + 32'(d_r)) * NQ + 32'(j_r));
  assign b_raddr  = q_raddr;
  assign busy     = (state != S_IDLE);

  // Counts of the leaf and of the current candidate's two sides.
  logic [K-1:0][CW-1:0] c_r;
  logic [NBW-1:0] n_tot, n_l, n_r;
  logic [SQW-1:0] sq_tot, sq_l, sq_r;
  always_comb begin
    n_tot = '0; n_l = '0; n_r = '0;
    sq_tot = '0; sq_l = '0; sq_r = '0;
    for (int k = 0; k < K; k++) begin
      logic [CW-1:0] cl, cr;
      cl = b_rdata[k];
      cr = (c_r[k] > cl) ? c_r[k] - cl : '0;
      n_tot  += NBW'(c_r[k]);
      n_l    += NBW'(cl);
      n_r    += NBW'(cr);
      sq_tot += SQW'(c_r[k]) * SQW'(c_r[k]);
      sq_l   += SQW'(cl) * SQW'(cl);
      sq_r   += SQW'(cr) * SQW'(cr);
    end
  end

  // Shared divider.
  logic           div_start, div_busy, div_done;
  logic [DVW-1:0] div_a, div_q;
  logic [NBW-1:0] div_b;
  seq_divider #(.W(DVW), .DW(NBW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(div_b),
    .busy(div_busy), .done(div_done), .quot(div_q)
  );

  always_comb begin
    div_start = 1'b0;
    div_a     = '0;
    div_b     = '0;
    case (state)
      S_NULL:  begin div_start = (n_tot != 0); div_a = DVW'(sq_tot) << FRAC; div_b = n_tot; end
      S_LEFT:  begin div_start = (n_l   != 0); div_a = DVW'(sq_l)   << FRAC; div_b = n_l;   end
      S_RIGHT: begin div_start = (n_r   != 0); div_a = DVW'(sq_r)   << FRAC; div_b = n_r;   end
      default: ;
    endcase
  end

  // Scores.
  logic [SCW-1:0] s_left, s_cand;
  logic [SCW-1:0] fb_s;                 // best of current feature
  feat_t          fb_thr;
  logic [K-1:0][CW-1:0] fb_bl;
  logic [SCW-1:0] s1, s2;               // best and runner-up
  logic           s1_valid;
  fidx_t          s1_feat;
  feat_t          s1_thr;
  logic [K-1:0][CW-1:0] s1_bl;

  // Hoeffding test.
  logic [SCW-1:0] delta_s;
  logic [MW-1:0]  lhs, rhs, tie_l, tie_r;
  always_comb begin
    delta_s = s1 - s2;
    lhs     = 2 * (MW'(delta_s) * MW'(delta_s));
    rhs     = MW'(HB_C_FX) * MW'(n_tot);
    tie_l   = MW'(HB_C_FX);
    tie_r   = 2 * MW'(n_tot) * MW'(TAU2_FX);
  end

  function automatic cls_t argmax(input logic [K-1:0][CW-1:0] v);
    cls_t          bk = '0;
    logic [CW-1:0] bc = v[0];
    for (int k = 1; k < K; k++) if (v[k] > bc) begin bc = v[k]; bk = cls_t'(k); end
    return bk;
  endfunction

  logic [K-1:0][CW-1:0] s1_br;
  always_comb
    for (int k = 0; k < K; k++) s1_br[k] = (c_r[k] > s1_bl[k]) ? c_r[k] - s1_bl[k] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      node_r   <= '0;
      d_r      <= '0;
      j_r      <= '0;
      c_r      <= '0;
      s_left   <= '0;
      s_cand   <= '0;
      fb_s     <= '0;
      fb_thr   <= '0;
      fb_bl    <= '0;
      s1       <= '0;
      s2       <= '0;
      s1_valid <= 1'b0;
      s1_feat  <= '0;
      s1_thr   <= '0;
      s1_bl    <= '0;
      done     <= 1'b0;
      do_split <= 1'b0;
      feat     <= '0;
      thr      <= '0;
      cls_l    <= '0;
      cls_r    <= '0;
      score_best   <= '0;
      score_second <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          node_r <= node;
          d_r    <= '0;
          j_r    <= '0;
          state  <= S_LOAD;
        end
        S_LOAD: begin
          c_r   <= cc_rdata;
          state <= S_NULL;
        end
        S_NULL: state <= S_NULL_W;
        S_NULL_W: if (n_tot == 0) begin
          // Empty leaf: nothing to decide.
          do_split <= 1'b0;
          done     <= 1'b1;
          state    <= S_IDLE;
        end else if (div_done) begin
          s1       <= SCW'(div_q);
          s2       <= SCW'(div_q);
          s1_valid <= 1'b0;
          fb_s     <= '0;
          state    <= S_LEFT;
        end
        S_LEFT: state <= (n_l != 0) ? S_LEFT_W : S_RIGHT;
        S_LEFT_W: if (div_done) begin
          s_left <= SCW'(div_q);
          state  <= S_RIGHT;
        end
        S_RIGHT: begin
          if (n_l == 0) s_left <= '0;
          state <= (n_r != 0) ? S_RIGHT_W : S_ACC;
          if (n_r == 0) s_cand <= '0;
        end
        S_RIGHT_W: if (div_done) begin
          s_cand <= SCW'(div_q);
          state  <= S_ACC;
        end
        S_ACC: begin
          // s_cand holds the right term, s_left the left term.
          if (s_left + s_cand > fb_s) begin
            fb_s   <= s_left + s_cand;
            fb_thr <= q_rdata;
            fb_bl  <= b_rdata;
          end
          if (j_r == QI'(NQ - 1)) begin
            j_r   <= '0;
            state <= S_MERGE;
          end else begin
            j_r   <= j_r + 1'b1;
            state <= S_LEFT;
          end
        end
        S_MERGE: begin
          if (fb_s > s1) begin
            s2       <= s1;
            s1       <= fb_s;
            s1_valid <= 1'b1;
            s1_feat  <= fidx_t'(d_r);
            s1_thr   <= fb_thr;
            s1_bl    <= fb_bl;
          end else if (fb_s > s2) begin
            s2 <= fb_s;
          end
          fb_s <= '0;
          if (d_r == DI'(D - 1)) begin
            state <= S_DECIDE;
          end else begin
            d_r   <= d_r + 1'b1;
            state <= S_LEFT;
          end
        end
        S_DECIDE: begin
          do_split     <= s1_valid && ((lhs > rhs) || (tie_l < tie_r));
          feat         <= s1_feat;
          thr          <= s1_thr;
          cls_l        <= argmax(s1_bl);
          cls_r        <= argmax(s1_br);
          score_best   <= s1;
          score_second <= s2;
          done         <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
