// gray_sync: the Gray_n element of a domain counter.
//
// Carries an incrementing N-bit count from the counted clock domain into the
// always-on domain. The binary count is Gray-encoded into a register in the
// source domain, so between two source edges only one bit changes; the Gray
// word then passes a STAGES-flop synchronizer in the destination domain and
// is decoded back to binary there. Any sample the destination takes is
// therefore a value the counter really held, at most STAGES+1 destination
// cycles old. The paper names this element and says it synchronizes the
// wrapping counter via Gray code; the register/synchronizer arrangement is
// this design's.
//
// Interface: src_clk/src_rst/src_count in the counted domain,
// dst_clk/dst_rst/dst_count in the always-on domain.
module gray_sync #(
  parameter int unsigned N      = bittide_pkg::DC_N,
  parameter int unsigned STAGES = 2
) (
  input  logic         src_clk,
  input  logic         src_rst,
  input  logic [N-1:0] src_count,
  input  logic         dst_clk,
  input  logic         dst_rst,
  output logic [N-1:0] dst_count
);
  logic [N-1:0] gray_src;
  logic [N-1:0] sync [STAGES];

  always_ff @(posedge src_clk) begin
    if (src_rst) gray_src <= '0;
    else         gray_src <= src_count ^ (src_count >> 1);
  end

  always_ff @(posedge dst_clk) begin
    if (dst_rst) begin
      for (int i = 0; i < STAGES; i++) sync[i] <= '0;
    end else begin
      sync[0] <= gray_src;
      for (int i = 1; i < STAGES; i++) sync[i] <= sync[i-1];
    end
  end

  // Gray to binary: bit i is the XOR of all Gray bits at i and above
  always_comb begin
    dst_count[N-1] = sync[STAGES-1][N-1];
    for (int i = int'(N) - 2; i >= 0; i--)
      dst_count[i] = dst_count[i+1] ^ sync[STAGES-1][i];
  end
endmodule
