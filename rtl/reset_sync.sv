// reset_sync: reset generator for one clock domain.
//
// The reset is asserted asynchronously whenever `arst_n` is low (board
// reset pressed or PLL not locked) and released synchronously, two edges
// of `clk` after `arst_n` rises, so every flip-flop of the domain leaves
// reset on the same edge. `rst_n` is active low. This is this design's own
// reset scheme; the source text does not describe reset.
module reset_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n
);

  logic stage;

  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) begin
      stage <= 1'b0;
      rst_n <= 1'b0;
    end else begin
      stage <= 1'b1;
      rst_n <= stage;
    end
  end

endmodule
