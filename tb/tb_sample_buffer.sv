// tb_sample_buffer: writes random samples, reads them back through the
// one-cycle read port and compares with a copy kept here.
module tb_sample_buffer;
  import ht_pkg::*;
  localparam int unsigned D = 3, DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, rd_en = 0, wr_train, rd_train;
  logic [5:0] wr_addr, rd_addr;
  feat_t [D-1:0] wr_x, rd_x;
  cls_t wr_label, rd_label;
  feat_t [D-1:0] mx [DEPTH];
  cls_t ml [DEPTH];
  logic mt [DEPTH];

  sample_buffer #(.D(D), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(i);
      for (int d = 0; d < D; d++) wr_x[d] = feat_t'($urandom);
      wr_label = cls_t'($urandom_range(0, 4)); wr_train = 1'($urandom);
      mx[i] = wr_x; ml[i] = wr_label; mt[i] = wr_train;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      @(negedge clk); rd_en = 1; rd_addr = 6'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_x != mx[a] || rd_label != ml[a] || rd_train != mt[a]) begin
        failures++;
        $display("mismatch at %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
