// domain_counter: DC_{n,m}, counts the cycles of one clock for the always-on domain.
//
// Built exactly as the paper's figure arranges it: the always-on reset is
// brought into the counted clock domain by a reset synchronizer; there a
// Wrap_N counter advances once per counted cycle; Gray_N carries the count
// into the always-on domain; Ext_{N,M} extends it to N+M bits; and a zero
// sign bit makes it a signed number of N+M+1 bits (that bit is constant 0 by
// construction, as in the figure's `signed`). Keeping the clock-crossing
// part only N bits wide keeps the logic between the domains small.
//
// Interface: clk_in (counted clock), clk/rst (always-on domain), count
// (signed, N+M+1 bits, always-on domain). The count lags the counted clock by
// the synchronizer depth (about 3 always-on cycles); it reads 0 until the
// wrapping counter has wrapped once, then counts from that wrap.
module domain_counter #(
  parameter int unsigned N = bittide_pkg::DC_N,
  parameter int unsigned M = bittide_pkg::DC_M
) (
  input  logic                    clk_in,
  input  logic                    clk,
  input  logic                    rst,
  output logic signed [N+M:0]     count
);
  logic           rst_in_dom;
  logic [N-1:0]   wrap_cnt;
  logic [N-1:0]   synced_cnt;
  logic [N+M-1:0] ext;

  reset_sync u_rst (
    .clk     (clk_in),
    .rst_in  (rst),
    .rst_out (rst_in_dom)
  );

  wrap_counter #(.N(N)) u_wrap (
    .clk   (clk_in),
    .rst   (rst_in_dom),
    .count (wrap_cnt)
  );

  gray_sync #(.N(N)) u_gray (
    .src_clk   (clk_in),
    .src_rst   (rst_in_dom),
    .src_count (wrap_cnt),
    .dst_clk   (clk),
    .dst_rst   (rst),
    .dst_count (synced_cnt)
  );

  ext_counter #(.N(N), .M(M)) u_ext (
    .clk (clk),
    .rst (rst),
    .c   (synced_cnt),
    .ext (ext)
  );

  // signed: N_{n+m} -> Z_{n+m+1} by adding a zero sign bit
  assign count = signed'({1'b0, ext});
endmodule
