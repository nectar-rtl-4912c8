// clk_divider: programmable integer clock divider.
//
// clk_out runs at the frequency of clk_in divided by `div`. A counter counts
// 0..div-1 on clk_in; the registered output is high while the next count is
// below div/2, so even ratios give a 50% duty cycle and odd ratios a slightly
// shorter high phase. div = 0 or 1 passes clk_in straight through. The
// ratio may be changed at any time and takes effect at the next wrap of the
// counter or sooner. The reset is asynchronous and active high; during reset
// the output is low (for div > 1).
//
// The paper shows a divider in front of every core, the uncore, the front
// bus and CLK_OUT, and gives nothing about how they work: the counter scheme,
// the width W and the pass-through for div <= 1 are this design's own.
module clk_divider #(
  parameter int unsigned W = 8
) (
  input  logic         clk_in,
  input  logic         rst,
  input  logic [W-1:0] div,
  output logic         clk_out
);

  logic [W-1:0] cnt, cnt_next;
  logic         q;

  always_comb cnt_next = (cnt >= div - 1'b1) ? '0 : cnt + 1'b1;

  always_ff @(posedge clk_in or posedge rst) begin
    if (rst) begin
      cnt <= '0;
      q   <= 1'b0;
    end else begin
      cnt <= cnt_next;
      q   <= cnt_next < (div >> 1);
    end
  end

  assign clk_out = (div <= 1) ? clk_in : q;

endmodule
