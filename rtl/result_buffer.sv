// result_buffer: the kernel's output array of classifications.
//
// Entry i holds the class the tree predicted for sample i, before the tree
// was trained on that sample (infer-then-train), and a flag telling whether
// the sample was then used for training.  The kernel writes it; the host
// reads it through a synchronous read port (data valid the cycle after the
// address).  The flag in the entry is this design's addition.
module result_buffer
  import ht_pkg::*;
#(
  parameter int unsigned DEPTH = NS_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // kernel write port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  cls_t          wr_pred,
  input  logic          wr_trained,
  // host read port, one cycle latency
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output cls_t          rd_pred,
  output logic          rd_trained
);
  logic [CLASS_IW:0] mem [DEPTH];
  logic [CLASS_IW:0] rd_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= {wr_trained, wr_pred};
    if (rd_en) rd_q <= mem[rd_addr];
  end

  assign rd_pred    = rd_q[CLASS_IW-1:0];
  assign rd_trained = rd_q[CLASS_IW];
endmodule
