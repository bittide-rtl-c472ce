// elastic_buffer: the per-link elastic buffer (EB) of a bittide node.
//
// A dual-clock FIFO. The write side runs on the link's recovered receive
// clock and appends one frame on every cycle in which wr_valid is high (a
// bittide link sends a frame on every cycle of the sender's clock). The read
// side runs on the node clock. After reset it first waits, without reading,
// until the occupancy it sees has reached START_FILL; from then on it removes
// one frame on every node-clock cycle, whatever the fill level, because a
// bittide node never stalls. The paper gives DEPTH = 32 and START_FILL = 18
// ("half full + 2"). Pointers cross between the domains in Gray code through
// two-flop synchronizers (this design's choice; the paper gives only the
// function). The occupancy the read side sees lags the true one by the
// synchronizer delay, so the buffer holds a few more than START_FILL frames
// when reading starts.
//
// A write into a full buffer is dropped and sets the sticky wr_overflow flag;
// a read from an empty buffer delivers rd_valid = 0 and sets the sticky
// rd_underflow flag. Clock control keeps both from happening in normal use.
//
// Interface: wr_clk/wr_rst/wr_valid/wr_frame/wr_overflow (receive domain);
// rd_clk/rd_rst/rd_frame/rd_valid/rd_running/rd_occupancy/rd_underflow (node
// domain). rd_frame/rd_valid appear one node cycle after the pop.
module elastic_buffer #(
  parameter int unsigned DEPTH      = bittide_pkg::EB_DEPTH,
  parameter int unsigned START_FILL = bittide_pkg::EB_START_FILL,
  parameter int unsigned FRAME_W    = bittide_pkg::FRAME_W,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic               wr_clk,
  input  logic               wr_rst,
  input  logic               wr_valid,
  input  logic [FRAME_W-1:0] wr_frame,
  output logic               wr_overflow,

  input  logic               rd_clk,
  input  logic               rd_rst,
  output logic [FRAME_W-1:0] rd_frame,
  output logic               rd_valid,
  output logic               rd_running,
  output logic [AW:0]        rd_occupancy,
  output logic               rd_underflow
);
  logic [FRAME_W-1:0] mem [DEPTH];

  // ---------------- write domain ----------------
  logic [AW:0] wptr_bin, wptr_gray;
  logic [AW:0] rptr_bin, rptr_gray_r;
  logic [AW:0] rptr_gray_w1, rptr_gray_w2, rptr_bin_w;
  logic        full;

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      rptr_gray_w1 <= '0;
      rptr_gray_w2 <= '0;
    end else begin
      rptr_gray_w1 <= rptr_gray_r;
      rptr_gray_w2 <= rptr_gray_w1;
    end
  end

  always_comb begin
    rptr_bin_w[AW] = rptr_gray_w2[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) rptr_bin_w[i] = rptr_bin_w[i+1] ^ rptr_gray_w2[i];
  end

  assign full = (wptr_bin - rptr_bin_w) >= (AW+1)'(DEPTH);

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wptr_bin    <= '0;
      wptr_gray   <= '0;
      wr_overflow <= 1'b0;
    end else if (wr_valid) begin
      if (full) begin
        wr_overflow <= 1'b1;
      end else begin
        wptr_bin  <= wptr_bin + 1'b1;
        wptr_gray <= (wptr_bin + 1'b1) ^ ((wptr_bin + 1'b1) >> 1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_valid && !full) mem[wptr_bin[AW-1:0]] <= wr_frame;
  end

  // ---------------- read domain ----------------
  logic [AW:0] wptr_gray_r1, wptr_gray_r2, wptr_bin_r;
  logic        empty;

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      wptr_gray_r1 <= '0;
      wptr_gray_r2 <= '0;
    end else begin
      wptr_gray_r1 <= wptr_gray;
      wptr_gray_r2 <= wptr_gray_r1;
    end
  end

  always_comb begin
    wptr_bin_r[AW] = wptr_gray_r2[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) wptr_bin_r[i] = wptr_bin_r[i+1] ^ wptr_gray_r2[i];
  end

  assign rd_occupancy = wptr_bin_r - rptr_bin;
  assign empty        = (rd_occupancy == '0);

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rptr_bin     <= '0;
      rptr_gray_r  <= '0;
      rd_running   <= 1'b0;
      rd_valid     <= 1'b0;
      rd_underflow <= 1'b0;
      rd_frame     <= '0;
    end else if (!rd_running) begin
      rd_valid <= 1'b0;
      if (rd_occupancy >= (AW+1)'(START_FILL)) rd_running <= 1'b1;
    end else if (empty) begin
      rd_valid     <= 1'b0;
      rd_underflow <= 1'b1;
    end else begin
      rd_frame    <= mem[rptr_bin[AW-1:0]];
      rd_valid    <= 1'b1;
      rptr_bin    <= rptr_bin + 1'b1;
      rptr_gray_r <= (rptr_bin + 1'b1) ^ ((rptr_bin + 1'b1) >> 1);
    end
  end

  // While the buffer has not started, nothing comes out of it.
  a_no_data_before_start: assert property (@(posedge rd_clk) disable iff (rd_rst)
    !rd_running |=> !rd_valid);
endmodule
