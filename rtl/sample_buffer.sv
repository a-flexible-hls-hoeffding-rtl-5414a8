// sample_buffer: the kernel's input array of samples.
//
// Each entry is one sample: D features (Q0.FW fractions), its class label
// and a train flag.  A sample with the flag set is first classified and then
// learnt from; one without it is only classified.  The host fills the array
// through the write port; the kernel reads it through a synchronous read
// port (data valid the cycle after the address).  The array persists across
// kernel calls, so the same samples may be run against several trees.
// The entry layout is this design's choice.
module sample_buffer
  import ht_pkg::*;
#(
  parameter int unsigned D     = D_DEF,
  parameter int unsigned DEPTH = NS_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // host write port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  feat_t [D-1:0] wr_x,
  input  cls_t          wr_label,
  input  logic          wr_train,
  // kernel read port, one cycle latency
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output feat_t [D-1:0] rd_x,
  output cls_t          rd_label,
  output logic          rd_train
);
  typedef struct packed {
    logic          train;
    cls_t          label;
    feat_t [D-1:0] x;
  } entry_t;

  entry_t mem [DEPTH];
  entry_t rd_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= '{train: wr_train, label: wr_label, x: wr_x};
    if (rd_en) rd_q <= mem[rd_addr];
  end

  assign rd_x     = rd_q.x;
  assign rd_label = rd_q.label;
  assign rd_train = rd_q.train;
endmodule
