// bittide_network: eight bittide nodes, their clock boards and their links,
// wired in one of the paper's topologies, with the checks of a complete run.
// Behavioural test harness, not synthesizable.
//
// TOPO 0 is the fully connected network (every node to every other, 7 links
// each), 1 the hourglass (two fully connected groups of four, nodes 3 and 4
// joined), 2 the cube (12 links, three per node, numbered as in adj()).
// Link k of node i goes to the k-th lowest-numbered neighbour of i. Each
// clock board starts with its own frequency offset. LONG_LATENCY, when not 0,
// replaces the one-way latency of the link pair 0 <-> 2 (a long fibre).
//
// The run: reset; clock boards programmed; links come up one after the other
// and one link drops once, so the link-stable wait restarts; the always-on
// clock runs fast during that 500 ms wait (its frequency is not a property of
// the design); all nodes wait for the shared trigger; the trigger starts the
// virtual buffers and clock control; after SYNC_US microseconds the elastic
// buffers are started; after RUN_US more the run ends. Throughout, the
// harness acts as every node's processor: it keeps writing, 32 ticks ahead,
// each send slot with the sender tick it will leave at, so that every frame
// received carries its departure tick and the logical latency
// (receive tick - departure tick) of every link can be checked to be constant.
//
// Checked: frequencies converge (final spread of all nodes below
// SPREAD_LIMIT_PPM, from an initial spread far above it); no elastic buffer
// over- or underflows; every used link delivers frames with one constant
// logical latency; round trips of the long link exceed the others by about
// twice the extra latency. Counted, and each required to happen: FINC and
// FDEC pulses, samples with no pulse, a link-stable restart, elastic buffer
// starts, frames delivered.
module bittide_network #(
  parameter int  TOPO             = 0,
  parameter int  LATENCY          = 16,
  parameter int  LONG_LATENCY     = 0,
  parameter real STEP_PPM         = 4.0,
  parameter int  SYNC_US          = 6000,
  parameter int  RUN_US           = 200,
  parameter real SPREAD_LIMIT_PPM = 12.0,
  // 0: the nodes keep every default (the 500 ms link-stable wait included);
  // otherwise the link-stable wait of every node, in always-on cycles
  parameter int  STABLE_CYCLES    = 0
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import bittide_pkg::*;
  localparam int NODES = 8;
  localparam int L     = NUM_LINKS;

  // ---------------- topology ----------------
  function automatic logic [NODES-1:0] adj(input int topo, input int i);
    logic [NODES-1:0] full_row [NODES] = '{8'hFE, 8'hFD, 8'hFB, 8'hF7, 8'hEF, 8'hDF, 8'hBF, 8'h7F};
    // hourglass: {0,1,2,3} and {4,5,6,7} fully connected, plus 3-4
    logic [NODES-1:0] hour_row [NODES] = '{8'h0E, 8'h0D, 8'h0B, 8'h17, 8'hE8, 8'hD0, 8'hB0, 8'h70};
    // cube as drawn: 0-1 0-2 0-4 1-3 1-5 2-3 2-6 3-7 4-5 4-6 5-7 6-7
    logic [NODES-1:0] cube_row [NODES] = '{8'h16, 8'h29, 8'h49, 8'h86, 8'h61, 8'h92, 8'h94, 8'h68};
    case (topo)
      1:       return hour_row[i];
      2:       return cube_row[i];
      default: return full_row[i];
    endcase
  endfunction

  // k-th neighbour of node i, -1 if node i has fewer than k+1 links
  function automatic int neighbour(input int topo, input int i, input int k);
    int n = 0;
    logic [NODES-1:0] row = adj(topo, i);
    for (int j = 0; j < NODES; j++) begin
      if (row[j]) begin
        if (n == k) return j;
        n++;
      end
    end
    return -1;
  endfunction

  // index of the link of node j that points at node i
  function automatic int link_index(input int topo, input int j, input int i);
    for (int k = 0; k < L; k++) if (neighbour(topo, j, k) == i) return k;
    return -1;
  endfunction

  function automatic real offset_ppm(input int i);
    real t [NODES] = '{35.0, -20.0, 60.0, -45.0, 10.0, -70.0, 25.0, -5.0};
    return t[i];
  endfunction

  function automatic int lat(input int i, input int j);
    if (LONG_LATENCY != 0 && ((i == 0 && j == 2) || (i == 2 && j == 0))) return LONG_LATENCY;
    return LATENCY;
  endfunction

  // ---------------- shared signals ----------------
  logic clk = 1'b0, rst = 1'b1;
  real  aon_half = 4.0;
  logic clock_ready = 1'b0, trigger = 1'b0, eb_request = 1'b0;
  logic [NODES-1:0][L-1:0] link_up = '0;

  logic [NODES-1:0]                 clk_node, finc, fdec;
  logic [NODES-1:0][L-1:0]          link_mask;
  logic [NODES-1:0][L-1:0][63:0]    tx_frame;
  logic [NODES-1:0][L-1:0]          rx_clk, rx_valid, rx_link_up;
  logic [NODES-1:0][L-1:0][63:0]    rx_frame;
  boot_state_e                      boot_state [NODES];
  logic [NODES-1:0][L-1:0]          eb_overflow, eb_underflow, eb_running;
  logic [NODES-1:0][63:0]           localtick;
  logic [NODES-1:0][L-1:0]          sm_wr_en;
  logic [NODES-1:0][5:0]            sm_wr_addr;
  logic [NODES-1:0][63:0]           sm_wr_frame;
  speed_change_e                    speed_change [NODES];
  logic [NODES-1:0]                 sample_valid;
  // internal elastic buffer output of every link, for the latency check
  logic [NODES-1:0][L-1:0]          eb_valid_w;
  logic [NODES-1:0][L-1:0][63:0]    eb_frame_w;

  // logical latency bookkeeping
  longint lambda      [NODES][L];
  int     lambda_seen [NODES][L];
  longint frames_rx = 0;
  int n_finc = 0, n_fdec = 0, n_idle = 0, n_eb_start = 0, n_restart = 0, n_lambda_change = 0;

  always #(aon_half) clk = ~clk;

  for (genvar i = 0; i < NODES; i++) begin : g_node
    clock_board_model #(
      .NOMINAL_NS (8.0),
      .OFFSET_PPM (offset_ppm(i)),
      .STEP_PPM   (STEP_PPM),
      .START_NS   (0.37 * i)
    ) u_cb (
      .finc (finc[i]),
      .fdec (fdec[i]),
      .clk  (clk_node[i])
    );

    if (STABLE_CYCLES == 0) begin : g_default
      bittide_node u_node (
        .clk           (clk),
        .rst           (rst),
        .clock_ready   (clock_ready),
        .link_mask     (link_mask[i]),
        .trigger       (trigger),
        .eb_request    (eb_request),
        .finc          (finc[i]),
        .fdec          (fdec[i]),
        .boot_state    (boot_state[i]),
        .links_stable  (),
        .ddc_occupancy (),
        .beta_sum      (),
        .c_est         (),
        .speed_change  (speed_change[i]),
        .sample_valid  (sample_valid[i]),
        .eb_overflow   (eb_overflow[i]),
        .eb_underflow  (eb_underflow[i]),
        .clk_node      (clk_node[i]),
        .localtick     (localtick[i]),
        .tx_frame      (tx_frame[i]),
        .sm_wr_en      (sm_wr_en[i]),
        .sm_wr_addr    (sm_wr_addr[i]),
        .sm_wr_frame   (sm_wr_frame[i]),
        .rm_rd_addr    (6'd0),
        .rm_rd_frame   (),
        .rm_rd_valid   (),
        .eb_running    (eb_running[i]),
        .eb_occupancy  (),
        .rx_clk        (rx_clk[i]),
        .rx_valid      (rx_valid[i]),
        .rx_frame      (rx_frame[i]),
        .rx_link_up    (rx_link_up[i])
      );
      for (genvar k = 0; k < L; k++) begin : g_tap
        assign eb_valid_w[i][k] = u_node.g_link[k].eb_valid;
        assign eb_frame_w[i][k] = u_node.g_link[k].eb_frame;
      end
    end else begin : g_short_wait
      bittide_node #(.STABLE_CYCLES(STABLE_CYCLES)) u_node (
        .clk           (clk),
        .rst           (rst),
        .clock_ready   (clock_ready),
        .link_mask     (link_mask[i]),
        .trigger       (trigger),
        .eb_request    (eb_request),
        .finc          (finc[i]),
        .fdec          (fdec[i]),
        .boot_state    (boot_state[i]),
        .links_stable  (),
        .ddc_occupancy (),
        .beta_sum      (),
        .c_est         (),
        .speed_change  (speed_change[i]),
        .sample_valid  (sample_valid[i]),
        .eb_overflow   (eb_overflow[i]),
        .eb_underflow  (eb_underflow[i]),
        .clk_node      (clk_node[i]),
        .localtick     (localtick[i]),
        .tx_frame      (tx_frame[i]),
        .sm_wr_en      (sm_wr_en[i]),
        .sm_wr_addr    (sm_wr_addr[i]),
        .sm_wr_frame   (sm_wr_frame[i]),
        .rm_rd_addr    (6'd0),
        .rm_rd_frame   (),
        .rm_rd_valid   (),
        .eb_running    (eb_running[i]),
        .eb_occupancy  (),
        .rx_clk        (rx_clk[i]),
        .rx_valid      (rx_valid[i]),
        .rx_frame      (rx_frame[i]),
        .rx_link_up    (rx_link_up[i])
      );
      for (genvar k = 0; k < L; k++) begin : g_tap
        assign eb_valid_w[i][k] = u_node.g_link[k].eb_valid;
        assign eb_frame_w[i][k] = u_node.g_link[k].eb_frame;
      end
    end

    // the harness as processor: slot (t + 32) mod 64 gets the value t + 32
    always @(negedge clk_node[i]) begin
      sm_wr_en[i]    <= '1;
      sm_wr_addr[i]  <= 6'(localtick[i] + 64'd32);
      sm_wr_frame[i] <= localtick[i] + 64'd32;
    end

    always @(posedge clk) begin
      if (sample_valid[i]) begin
        if (speed_change[i] == SPEED_INC) n_finc++;
        else if (speed_change[i] == SPEED_DEC) n_fdec++;
        else n_idle++;
      end
    end

    for (genvar k = 0; k < L; k++) begin : g_link
      localparam int J  = neighbour(TOPO, i, k);
      if (J >= 0) begin : g_used
        localparam int KJ = link_index(TOPO, J, i);
        assign link_mask[i][k]  = 1'b1;
        assign rx_link_up[i][k] = link_up[i][k];
        link_model #(.FRAME_W(64), .LATENCY(lat(J, i))) u_link (
          .tx_clk   (clk_node[J]),
          .tx_frame (tx_frame[J][KJ]),
          .up       (link_up[i][k]),
          .rx_clk   (rx_clk[i][k]),
          .rx_frame (rx_frame[i][k]),
          .rx_valid (rx_valid[i][k])
        );

        // every received frame carries its departure tick
        always @(posedge clk_node[i]) begin
          if (eb_request && eb_valid_w[i][k]) begin
            frames_rx++;
            if (lambda_seen[i][k] == 0) begin
              lambda[i][k] = longint'(localtick[i]) - longint'(eb_frame_w[i][k]);
              lambda_seen[i][k] = 1;
            end else if (longint'(localtick[i]) - longint'(eb_frame_w[i][k]) != lambda[i][k]) begin
              n_lambda_change++;
              if (n_lambda_change < 5)
                $display("FAIL: node %0d link %0d logical latency moved from %0d to %0d", i, k,
                         lambda[i][k], longint'(localtick[i]) - longint'(eb_frame_w[i][k]));
            end
          end
        end

        always @(posedge eb_running[i][k]) if (eb_request) n_eb_start++;
      end else begin : g_unused
        assign link_mask[i][k]  = 1'b0;
        assign rx_link_up[i][k] = 1'b0;
        assign rx_clk[i][k]     = 1'b0;
        assign rx_frame[i][k]   = '0;
        assign rx_valid[i][k]   = 1'b0;
      end
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real spread_ppm();
    real lo = 1.0e9, hi = -1.0e9, v;
    v = g_node[0].u_cb.rel_ppm(); lo = (v < lo) ? v : lo; hi = (v > hi) ? v : hi;
    v = g_node[1].u_cb.rel_ppm(); lo = (v < lo) ? v : lo; hi = (v > hi) ? v : hi;
    v = g_node[2].u_cb.rel_ppm(); lo = (v < lo) ? v : lo; hi = (v > hi) ? v : hi;
    v = g_node[3].u_cb.rel_ppm(); lo = (v < lo) ? v : lo; hi = (v > hi) ? v : hi;
    v = g_node[4].u_cb.rel_ppm(); lo = (v < lo) ? v : lo; hi = (v > hi) ? v : hi;
    v = g_node[5].u_cb.rel_ppm(); lo = (v < lo) ? v : lo; hi = (v > hi) ? v : hi;
    v = g_node[6].u_cb.rel_ppm(); lo = (v < lo) ? v : lo; hi = (v > hi) ? v : hi;
    v = g_node[7].u_cb.rel_ppm(); lo = (v < lo) ? v : lo; hi = (v > hi) ? v : hi;
    return hi - lo;
  endfunction

  function automatic int all_in(input boot_state_e s);
    for (int i = 0; i < NODES; i++) if (boot_state[i] != s) return 0;
    return 1;
  endfunction

  real spread0, spread1;
  longint rtt, rtt_short_max, rtt_long;

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
    for (int i = 0; i < NODES; i++)
      for (int k = 0; k < L; k++) begin lambda[i][k] = 0; lambda_seen[i][k] = 0; end
    // the 500 ms link-stable wait runs on a fast always-on clock
    aon_half = 0.002;
    repeat (4) @(posedge clk);
    rst = 1'b0;
    repeat (20) @(posedge clk);
    clock_ready = 1'b1;
    // links come up one node after the other
    for (int i = 0; i < NODES; i++) begin
      #50;
      link_up[i] = '1;
    end
    #300;
    // one link drops briefly: the stable count must restart
    link_up[3][0] = 1'b0;
    #100;
    link_up[3][0] = 1'b1;
    n_restart++;
    check(all_in(BOOT_LINK_WAIT) == 1, "all nodes wait for stable links");
    // poll: 500 ms of the always-on clock at the fast rate is about 250 us
    for (int t = 0; t < 2000 && all_in(BOOT_WAIT_TRIGGER) == 0; t++) #1000;
    check(all_in(BOOT_WAIT_TRIGGER) == 1, "all nodes reach the trigger wait");
    aon_half = 4.0;
    repeat (10) @(posedge clk);
    spread0 = spread_ppm();
    $display("[%0t] links stable, initial frequency spread %0.2f ppm", $time, spread0);
    @(negedge clk) trigger = 1'b1;
    @(negedge clk) trigger = 1'b0;
    #1;
    check(all_in(BOOT_SYNC) == 1, "trigger starts clock control on every node");
    for (int t = 0; t < SYNC_US / 100; t++) begin
      #100000;
      $display("[%0t] spread %0.2f ppm  finc %0d fdec %0d", $time, spread_ppm(), n_finc, n_fdec);
    end
    spread1 = spread_ppm();
    check(spread1 < SPREAD_LIMIT_PPM, $sformatf("frequencies converged (spread %0.2f ppm)", spread1));
    check(spread0 > 3.0 * SPREAD_LIMIT_PPM, "initial spread well above the limit");
    @(negedge clk) eb_request = 1'b1;
    #(RUN_US * 1000);
    check(all_in(BOOT_RUN) == 1, "elastic buffers enabled on every node");
    // an unused link's buffer never sees a write clock, so its flags mean nothing
    check((eb_overflow & link_mask) == '0, "no elastic buffer overflow");
    check((eb_underflow & link_mask) == '0, "no elastic buffer underflow");
    check(n_lambda_change == 0, "logical latencies constant");
    // every used link delivered frames; round-trip logical latencies
    rtt_short_max = 0;
    rtt_long = 0;
    for (int i = 0; i < NODES; i++) begin
      for (int k = 0; k < L; k++) begin
        if (neighbour(TOPO, i, k) >= 0) begin
          check(lambda_seen[i][k] == 1, $sformatf("node %0d link %0d delivered frames", i, k));
          rtt = lambda[i][k] + lambda[neighbour(TOPO, i, k)][link_index(TOPO, neighbour(TOPO, i, k), i)];
          $write("%6d", rtt);
          if (LONG_LATENCY != 0 && ((i == 0 && neighbour(TOPO, i, k) == 2) || (i == 2 && neighbour(TOPO, i, k) == 0)))
            rtt_long = rtt;
          else if (rtt > rtt_short_max)
            rtt_short_max = rtt;
        end
      end
      $write("   <- round-trip logical latencies of node %0d\n", i);
    end
    if (LONG_LATENCY != 0) begin
      check(rtt_long - rtt_short_max >= 2 * (LONG_LATENCY - LATENCY) - 8 &&
            rtt_long - rtt_short_max <= 2 * (LONG_LATENCY - LATENCY) + 8,
            $sformatf("long link round trip %0d vs %0d", rtt_long, rtt_short_max));
    end
    $display("mechanisms: finc %0d fdec %0d idle-samples %0d link-wait-restarts %0d eb-starts %0d frames %0d",
             n_finc, n_fdec, n_idle, n_restart, n_eb_start, frames_rx);
    check(n_finc > 0, "FINC pulses sent");
    check(n_fdec > 0, "FDEC pulses sent");
    check(n_idle > 0, "samples without correction");
    check(n_restart > 0, "link-stable wait restarted");
    check(n_eb_start > 0, "elastic buffers started");
    check(frames_rx > 0, "frames received");
    done = 1'b1;
  end
endmodule
