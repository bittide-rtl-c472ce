// ddc: domain difference counter, a "virtual elastic buffer" for one link.
//
// While the network is being synchronized no data needs to be stored, only
// the occupancy an elastic buffer would have. Two domain counters count the
// cycles of the link's recovered receive clock (frames arriving) and of the
// node's transmit clock (frames leaving), both seen in the always-on domain.
// Their difference, arrived minus departed, is the occupancy; it is truncated
// to OUT_W bits and read as a signed number whose zero stands for a buffer
// that is exactly half full (2^(OUT_W-1) frames of a 2^OUT_W-frame buffer).
// Sizes follow the paper: DC_{8,56}, i.e. 64-bit extended counts, 65-bit
// signed difference, 32-bit result. The paper's figure labels the DC outputs
// Z_64 while its DC definition gives Z_{n+m+1} = Z_65; the 65-bit form is used.
//
// Interface: clk_rx, clk_tx (counted clocks), clk/rst (always-on domain),
// occupancy (OUT_W-bit signed, combinational from the two counts).
module ddc #(
  parameter int unsigned N     = bittide_pkg::DC_N,
  parameter int unsigned M     = bittide_pkg::DC_M,
  parameter int unsigned OUT_W = bittide_pkg::OCC_W
) (
  input  logic                    clk_rx,
  input  logic                    clk_tx,
  input  logic                    clk,
  input  logic                    rst,
  output logic signed [OUT_W-1:0] occupancy
);
  logic signed [N+M:0] cnt_rx;
  logic signed [N+M:0] cnt_tx;
  logic signed [N+M:0] diff;

  domain_counter #(.N(N), .M(M)) u_dc_rx (
    .clk_in (clk_rx),
    .clk    (clk),
    .rst    (rst),
    .count  (cnt_rx)
  );

  domain_counter #(.N(N), .M(M)) u_dc_tx (
    .clk_in (clk_tx),
    .clk    (clk),
    .rst    (rst),
    .count  (cnt_tx)
  );

  assign diff      = cnt_rx - cnt_tx;
  assign occupancy = diff[OUT_W-1:0];
endmodule
