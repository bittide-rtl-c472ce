// bit_sync: two-flop synchronizer for single-bit level signals.
//
// Used for slow status levels (link up, sticky error flags) that cross into
// another clock domain. The output follows the input two destination cycles
// later; a level must stay put for longer than that to be seen.
//
// Interface: clk/rst (destination domain), d (any domain), q.
module bit_sync #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;

  always_ff @(posedge clk) begin
    if (rst) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
