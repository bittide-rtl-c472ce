// bittide_node: one node of a bittide network.
//
// A bittide node has NUM_LINKS incoming and NUM_LINKS outgoing serial links
// and a local oscillator whose frequency it can nudge up or down. On every
// tick of that node clock it sends one frame on every outgoing link and takes
// one frame out of every incoming link's elastic buffer. Frames arrive at the
// rate of the sender's clock, so a buffer fills when its neighbour is faster
// and drains when it is slower. The node sums those fill levels and steers its
// own clock towards them (clock_control -> FINC/FDEC pins of the clock board),
// which drives all clocks of the network to the same average rate. Logical
// latency (receive tick minus send tick of a frame) is then constant.
//
// The structure follows the paper's node diagram: per link a transceiver with
// clock and data recovery (outside this module: rx_clk, rx_valid, rx_frame,
// rx_link_up and tx_frame are its ports), an elastic buffer (EB), and a
// domain difference counter (DDC); one clock controller fed by all DDCs,
// whose FINC/FDEC go to the external clock board; telemetry towards the
// logic analyser. The paper's boot order is kept by boot_ctrl: the DDCs act
// as virtual elastic buffers from the start trigger on, and the real elastic
// buffers are started only after eb_request, once the clocks have converged.
// Clock control always uses the DDC occupancies. The send and receive
// memories (slot = localtick mod MEM_DEPTH) and the exact port list are this
// design's.
//
// Clock domains: clk (always-on: DDCs, clock control, boot), clk_node (node
// clock from the clock board: localtick, memories, EB read side, tx_frame),
// rx_clk[j] (recovered clock of link j: EB write side).
//
// Resets: rst, and the registered ddc_rst_q / eb_off_q, are synchronous in
// the always-on domain and at the same time the asynchronous-assert input of
// the reset synchronizers of the other clock domains. That double use is
// intended (each foreign domain releases its reset on its own clock edge);
// a lint tool reports it as a signal used both synchronously and
// asynchronously.
module bittide_node #(
  parameter int unsigned NUM_LINKS     = bittide_pkg::NUM_LINKS,
  parameter int unsigned FRAME_W       = bittide_pkg::FRAME_W,
  parameter int unsigned DC_N          = bittide_pkg::DC_N,
  parameter int unsigned DC_M          = bittide_pkg::DC_M,
  parameter int unsigned OCC_W         = bittide_pkg::OCC_W,
  parameter int unsigned EB_DEPTH      = bittide_pkg::EB_DEPTH,
  parameter int unsigned EB_START_FILL = bittide_pkg::EB_START_FILL,
  parameter int unsigned SAMPLE_PERIOD = 125,
  parameter int unsigned KP_NUM        = 64,
  parameter int unsigned KP_FRAC       = 8,
  parameter int unsigned PULSE_CYCLES  = 1,
  parameter int unsigned STABLE_CYCLES = 62_500_000,
  parameter int unsigned MEM_DEPTH     = 64,
  localparam int unsigned MAW          = $clog2(MEM_DEPTH),
  localparam int unsigned EAW          = $clog2(EB_DEPTH),
  localparam int unsigned SUM_W        = OCC_W + $clog2(NUM_LINKS + 1)
) (
  // always-on domain
  input  logic                                  clk,
  input  logic                                  rst,
  input  logic                                  clock_ready,
  input  logic [NUM_LINKS-1:0]                  link_mask,
  input  logic                                  trigger,
  input  logic                                  eb_request,
  output logic                                  finc,
  output logic                                  fdec,
  output bittide_pkg::boot_state_e              boot_state,
  output logic                                  links_stable,
  output logic signed [NUM_LINKS-1:0][OCC_W-1:0] ddc_occupancy,
  output logic signed [SUM_W-1:0]               beta_sum,
  output logic signed [bittide_pkg::CEST_W-1:0] c_est,
  output bittide_pkg::speed_change_e            speed_change,
  output logic                                  sample_valid,
  output logic [NUM_LINKS-1:0]                  eb_overflow,
  output logic [NUM_LINKS-1:0]                  eb_underflow,
  // node clock domain
  input  logic                                  clk_node,
  output logic [63:0]                           localtick,
  output logic [NUM_LINKS-1:0][FRAME_W-1:0]     tx_frame,
  input  logic [NUM_LINKS-1:0]                  sm_wr_en,
  input  logic [MAW-1:0]                        sm_wr_addr,
  input  logic [FRAME_W-1:0]                    sm_wr_frame,
  input  logic [MAW-1:0]                        rm_rd_addr,
  output logic [NUM_LINKS-1:0][FRAME_W-1:0]     rm_rd_frame,
  output logic [NUM_LINKS-1:0]                  rm_rd_valid,
  output logic [NUM_LINKS-1:0]                  eb_running,
  output logic [NUM_LINKS-1:0][EAW:0]           eb_occupancy,
  // per-link receive domains (from the transceivers)
  input  logic [NUM_LINKS-1:0]                  rx_clk,
  input  logic [NUM_LINKS-1:0]                  rx_valid,
  input  logic [NUM_LINKS-1:0][FRAME_W-1:0]     rx_frame,
  input  logic [NUM_LINKS-1:0]                  rx_link_up
);
  // ---------------- always-on domain: boot, DDC, clock control ----------------
  logic [NUM_LINKS-1:0] link_up_aon;
  logic                 ddc_run, cc_enable, eb_enable;
  logic                 ddc_rst_q, eb_off_q;

  bit_sync #(.W(NUM_LINKS)) u_link_up_sync (
    .clk (clk), .rst (rst), .d (rx_link_up), .q (link_up_aon)
  );

  boot_ctrl #(.NUM_LINKS(NUM_LINKS), .STABLE_CYCLES(STABLE_CYCLES)) u_boot (
    .clk          (clk),
    .rst          (rst),
    .clock_ready  (clock_ready),
    .link_up      (link_up_aon),
    .link_mask    (link_mask),
    .trigger      (trigger),
    .eb_request   (eb_request),
    .state        (boot_state),
    .links_stable (links_stable),
    .ddc_run      (ddc_run),
    .cc_enable    (cc_enable),
    .eb_enable    (eb_enable)
  );

  // registered so that the resets they drive into other domains are glitch free
  always_ff @(posedge clk) begin
    if (rst) begin
      ddc_rst_q <= 1'b1;
      eb_off_q  <= 1'b1;
    end else begin
      ddc_rst_q <= !ddc_run;
      eb_off_q  <= !eb_enable;
    end
  end

  for (genvar j = 0; j < int'(NUM_LINKS); j++) begin : g_ddc
    ddc #(.N(DC_N), .M(DC_M), .OUT_W(OCC_W)) u_ddc (
      .clk_rx    (rx_clk[j]),
      .clk_tx    (clk_node),
      .clk       (clk),
      .rst       (ddc_rst_q),
      .occupancy (ddc_occupancy[j])
    );
  end

  clock_control #(
    .NUM_LINKS     (NUM_LINKS),
    .OCC_W         (OCC_W),
    .CEST_W        (bittide_pkg::CEST_W),
    .SAMPLE_PERIOD (SAMPLE_PERIOD),
    .KP_NUM        (KP_NUM),
    .KP_FRAC       (KP_FRAC),
    .PULSE_CYCLES  (PULSE_CYCLES)
  ) u_cc (
    .clk          (clk),
    .rst          (rst),
    .enable       (cc_enable),
    .link_mask    (link_mask),
    .occupancy    (ddc_occupancy),
    .finc         (finc),
    .fdec         (fdec),
    .beta_sum     (beta_sum),
    .c_est        (c_est),
    .speed_change (speed_change),
    .sample_valid (sample_valid)
  );

  // ---------------- node clock domain ----------------
  logic rst_node, eb_rd_rst;
  logic [NUM_LINKS-1:0] eb_underflow_node;

  reset_sync u_rst_node  (.clk (clk_node), .rst_in (rst),      .rst_out (rst_node));
  reset_sync u_rst_ebrd  (.clk (clk_node), .rst_in (eb_off_q), .rst_out (eb_rd_rst));

  localtick_counter #(.W(64)) u_tick (
    .clk (clk_node), .rst (rst_node), .tick (localtick)
  );

  for (genvar j = 0; j < int'(NUM_LINKS); j++) begin : g_link
    logic               eb_wr_rst;
    logic               eb_ovf_rx;
    logic [FRAME_W-1:0] eb_frame;
    logic               eb_valid;

    reset_sync u_rst_ebwr (.clk (rx_clk[j]), .rst_in (eb_off_q), .rst_out (eb_wr_rst));

    elastic_buffer #(
      .DEPTH      (EB_DEPTH),
      .START_FILL (EB_START_FILL),
      .FRAME_W    (FRAME_W)
    ) u_eb (
      .wr_clk       (rx_clk[j]),
      .wr_rst       (eb_wr_rst),
      .wr_valid     (rx_valid[j]),
      .wr_frame     (rx_frame[j]),
      .wr_overflow  (eb_ovf_rx),
      .rd_clk       (clk_node),
      .rd_rst       (eb_rd_rst),
      .rd_frame     (eb_frame),
      .rd_valid     (eb_valid),
      .rd_running   (eb_running[j]),
      .rd_occupancy (eb_occupancy[j]),
      .rd_underflow (eb_underflow_node[j])
    );

    bit_sync u_ovf_sync (.clk (clk), .rst (rst), .d (eb_ovf_rx), .q (eb_overflow[j]));

    receive_memory #(.DEPTH(MEM_DEPTH), .FRAME_W(FRAME_W), .TICK_W(64)) u_rxmem (
      .clk      (clk_node),
      .rst      (rst_node),
      .tick     (localtick),
      .rx_valid (eb_valid),
      .rx_frame (eb_frame),
      .rd_addr  (rm_rd_addr),
      .rd_frame (rm_rd_frame[j]),
      .rd_valid (rm_rd_valid[j])
    );

    send_memory #(.DEPTH(MEM_DEPTH), .FRAME_W(FRAME_W), .TICK_W(64)) u_txmem (
      .clk      (clk_node),
      .rst      (rst_node),
      .tick     (localtick),
      .wr_en    (sm_wr_en[j]),
      .wr_addr  (sm_wr_addr),
      .wr_frame (sm_wr_frame),
      .tx_frame (tx_frame[j])
    );
  end

  bit_sync #(.W(NUM_LINKS)) u_unf_sync (
    .clk (clk), .rst (rst), .d (eb_underflow_node), .q (eb_underflow)
  );
endmodule
