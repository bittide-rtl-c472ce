// link_model: behavioural model of one directed bittide link.
// Behavioural model only: it stands for the sender's transceiver, the cable
// and the receiver's clock and data recovery.
//
// The receiver sees the sender's clock as its recovered clock and the
// sender's frames LATENCY sender-clock cycles later. While the link is down
// no valid frames are delivered.
//
// Interface: tx_clk, tx_frame (sender side), up (link state); rx_clk,
// rx_frame, rx_valid (receiver side).
module link_model #(
  parameter int FRAME_W = 64,
  parameter int LATENCY = 16
) (
  input  logic               tx_clk,
  input  logic [FRAME_W-1:0] tx_frame,
  input  logic               up,
  output logic               rx_clk,
  output logic [FRAME_W-1:0] rx_frame,
  output logic               rx_valid
);
  logic [FRAME_W-1:0] line [LATENCY];
  logic               vline [LATENCY];

  initial for (int i = 0; i < LATENCY; i++) begin line[i] = '0; vline[i] = 1'b0; end

  always @(posedge tx_clk) begin
    line[0]  <= tx_frame;
    vline[0] <= up;
    for (int i = 1; i < LATENCY; i++) begin
      line[i]  <= line[i-1];
      vline[i] <= vline[i-1];
    end
  end

  assign rx_clk   = tx_clk;
  assign rx_frame = line[LATENCY-1];
  assign rx_valid = vline[LATENCY-1] & up;
endmodule
