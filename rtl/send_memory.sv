// send_memory: the memory the frames of one outgoing link are taken from.
//
// A bittide link carries a frame on every tick, so the transmitter does not
// wait for data: at localtick t it sends whatever sits in slot t mod DEPTH.
// The processor schedules a frame for a given tick by writing that slot ahead
// of time. The paper says only that outgoing frames are taken from a memory
// buffer; the slot-per-tick ring, DEPTH = 64 and the single node-clock domain
// (the paper's node clock drives processor and transmitters alike) are this
// design's choices.
//
// Interface: clk (node clock), rst, tick (localtick), wr_en/wr_addr/wr_frame
// (processor side), tx_frame (registered: the frame of tick t appears one
// cycle after tick shows t).
module send_memory #(
  parameter int unsigned DEPTH   = 64,
  parameter int unsigned FRAME_W = bittide_pkg::FRAME_W,
  parameter int unsigned TICK_W  = 64,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [TICK_W-1:0]  tick,
  input  logic               wr_en,
  input  logic [AW-1:0]      wr_addr,
  input  logic [FRAME_W-1:0] wr_frame,
  output logic [FRAME_W-1:0] tx_frame
);
  logic [FRAME_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_frame;
  end

  always_ff @(posedge clk) begin
    if (rst) tx_frame <= '0;
    else     tx_frame <= mem[tick[AW-1:0]];
  end
endmodule
