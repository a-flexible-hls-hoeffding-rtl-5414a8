// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// start loads dividend and divisor; W clock cycles later done pulses for one
// cycle with quot = dividend / divisor.  A zero divisor returns all ones.
// busy is high from the cycle after start until done.  Used by the split
// evaluator, which divides squared class counts by branch sizes.
module seq_divider #(
  parameter int unsigned W  = 48,
  parameter int unsigned DW = 24
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [W-1:0]  dividend,
  input  logic [DW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [W-1:0]  quot
);
  logic [W-1:0]  q_r;
  logic [DW:0]   rem_r;
  logic [DW-1:0] dvs_r;
  logic [$clog2(W+1)-1:0] cnt_r;

  logic [DW:0] shifted;
  logic        ge;
  always_comb begin
    shifted = {rem_r[DW-1:0], q_r[W-1]};
    ge      = (shifted >= {1'b0, dvs_r});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      q_r   <= '0;
      rem_r <= '0;
      dvs_r <= '0;
      cnt_r <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        q_r   <= dividend;
        rem_r <= '0;
        dvs_r <= divisor;
        cnt_r <= '0;
      end else if (busy) begin
        rem_r <= ge ? (shifted - {1'b0, dvs_r}) : shifted;
        q_r   <= {q_r[W-2:0], ge};
        cnt_r <= cnt_r + 1'b1;
        if (cnt_r == $bits(cnt_r)'(W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quot = q_r;
endmodule
