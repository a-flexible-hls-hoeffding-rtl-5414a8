// tb_result_buffer: writes random classifications, reads them back through
// the one-cycle read port and compares with a copy kept here.
module tb_result_buffer;
  import ht_pkg::*;
  localparam int unsigned DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, rd_en = 0, wr_trained, rd_trained;
  logic [5:0] wr_addr, rd_addr;
  cls_t wr_pred, rd_pred;
  cls_t mp [DEPTH];
  logic mt [DEPTH];

  result_buffer #(.DEPTH(DEPTH)) dut (.*);

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
      wr_pred = cls_t'($urandom); wr_trained = 1'($urandom);
      mp[i] = wr_pred; mt[i] = wr_trained;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      @(negedge clk); rd_en = 1; rd_addr = 6'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_pred != mp[a] || rd_trained != mt[a]) begin
        failures++;
        $display("mismatch at %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
