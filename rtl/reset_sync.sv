// reset_sync: reset synchronizer for one clock domain.
//
// The reset is asserted asynchronously, as soon as rst_in rises, and released
// synchronously, STAGES clock edges after rst_in falls, through a chain of
// flops, so every flop of the domain leaves reset on the same edge. Both
// polarities are active high. The paper shows one synchronizer per core, for
// the uncore and for the front bus, fed by the chip's active-high reset; the
// three-stage chain is this design's own choice.
module reset_sync #(
  parameter int unsigned STAGES = 3
) (
  input  logic clk,
  input  logic rst_in,
  output logic rst_out
);

  logic [STAGES-1:0] chain;

  always_ff @(posedge clk or posedge rst_in) begin
    if (rst_in) chain <= '1;
    else        chain <= {chain[STAGES-2:0], 1'b0};
  end

  assign rst_out = chain[STAGES-1];

endmodule
