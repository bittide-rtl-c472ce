// localtick_counter: the node's logical clock theta.
//
// Counts the ticks of the node clock. Every tick the node sends one frame on
// each outgoing link and takes one frame from each elastic buffer, so the
// count is both the node's logical time and its number of frames sent. The
// paper defines this counter; its width (64 bits, which does not wrap in
// thousands of years at 125 MHz) and its reset value 0 are this design's.
// Counters of different nodes are never aligned: only differences matter.
//
// Interface: clk (node clock), rst (synchronous), tick (current count).
module localtick_counter #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst,
  output logic [W-1:0] tick
);
  always_ff @(posedge clk) begin
    if (rst) tick <= '0;
    else     tick <= tick + 1'b1;
  end
endmodule
