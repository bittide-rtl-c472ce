// receive_memory: the memory frames of one incoming link are moved into.
//
// On every node-clock tick the frame popped from the link's elastic buffer is
// stored in slot t mod DEPTH, t being the localtick at which it was received.
// Because logical latency is constant, a frame sent at the sender's tick s
// always lands at tick s + lambda, so the processor knows in advance which
// slot it will be in. Each slot keeps a valid bit, cleared when the buffer
// delivered nothing that tick. The paper says only that received frames are
// moved into memory set aside for them; layout, DEPTH = 64 and the valid bit
// are this design's choices.
//
// Interface: clk (node clock), rst, tick, rx_valid/rx_frame (from the elastic
// buffer, for the current tick), rd_addr -> rd_frame/rd_valid (registered,
// one cycle).
module receive_memory #(
  parameter int unsigned DEPTH   = 64,
  parameter int unsigned FRAME_W = bittide_pkg::FRAME_W,
  parameter int unsigned TICK_W  = 64,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [TICK_W-1:0]  tick,
  input  logic               rx_valid,
  input  logic [FRAME_W-1:0] rx_frame,
  input  logic [AW-1:0]      rd_addr,
  output logic [FRAME_W-1:0] rd_frame,
  output logic               rd_valid
);
  logic [FRAME_W-1:0] mem [DEPTH];
  logic [DEPTH-1:0]   slot_valid;

  always_ff @(posedge clk) begin
    mem[tick[AW-1:0]] <= rx_frame;
  end

  always_ff @(posedge clk) begin
    if (rst) slot_valid <= '0;
    else     slot_valid[tick[AW-1:0]] <= rx_valid;
  end

  always_ff @(posedge clk) begin
    rd_frame <= mem[rd_addr];
    rd_valid <= slot_valid[rd_addr];
  end
endmodule
