// wrap_counter: the Wrap_n counter of a domain counter.
//
// An N-bit counter that advances by one on every edge of the clock being
// counted and wraps from 2^N-1 back to 0, as the paper describes. It runs in
// the counted (controlled) clock domain; the count is carried to the
// always-on domain by gray_sync. Reset value 0 is this design's choice.
//
// Interface: clk, rst (synchronous, active high), count (N bits). The count
// changes one cycle after each clk edge out of reset.
module wrap_counter #(
  parameter int unsigned N = bittide_pkg::DC_N
) (
  input  logic         clk,
  input  logic         rst,
  output logic [N-1:0] count
);
  always_ff @(posedge clk) begin
    if (rst) count <= '0;
    else     count <= count + 1'b1;
  end
endmodule
