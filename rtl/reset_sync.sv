// reset_sync: reset synchronizer (the "R" element inside a domain counter).
//
// Asserts its output asynchronously as soon as rst_in rises, and releases it
// only after STAGES rising edges of clk, so that logic in the clk domain leaves
// reset on a clean edge. The symbol is the paper's; the two-flop structure with
// asynchronous assertion is this design's choice.
//
// Interface: clk (destination clock), rst_in (active high, any domain),
// rst_out (active high, released synchronously to clk, STAGES cycles late).
module reset_sync #(
  parameter int unsigned STAGES = 2
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
