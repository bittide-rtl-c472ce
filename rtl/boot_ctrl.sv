// boot_ctrl: bring-up sequencer of a bittide node.
//
// Follows the paper's boot order in the always-on clock domain:
//   BOOT_CLOCK_PROGRAM  wait until the clock board has been programmed
//                       (clock_ready, from the board programmer);
//   BOOT_LINK_WAIT      wait until every link selected by link_mask has been
//                       up without a break for STABLE_CYCLES cycles; a drop of
//                       any such link restarts the count (the transceivers
//                       retry their own negotiation meanwhile);
//   BOOT_WAIT_TRIGGER   wait for the network-wide start trigger;
//   BOOT_SYNC           domain difference counters and clock control run
//                       (ddc_run, cc_enable);
//   BOOT_RUN            after eb_request (clocks judged converged), the
//                       elastic buffers are started as well (eb_enable).
// STABLE_CYCLES = 62,500,000 is the paper's 500 ms at an assumed 125 MHz
// always-on clock. The state encoding, the eb_request input and the rule that
// a link drop after the trigger does not restart the sequence are this
// design's choices; the paper does not say what happens then.
//
// Interface: clk/rst, clock_ready, link_up, link_mask, trigger, eb_request
// (all synchronous to clk); state, links_stable, ddc_run, cc_enable,
// eb_enable (decoded from the state register, so they change on the same
// clock edge as the state).
module boot_ctrl #(
  parameter int unsigned NUM_LINKS     = bittide_pkg::NUM_LINKS,
  parameter int unsigned STABLE_CYCLES = 62_500_000
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clock_ready,
  input  logic [NUM_LINKS-1:0]     link_up,
  input  logic [NUM_LINKS-1:0]     link_mask,
  input  logic                     trigger,
  input  logic                     eb_request,
  output bittide_pkg::boot_state_e state,
  output logic                     links_stable,
  output logic                     ddc_run,
  output logic                     cc_enable,
  output logic                     eb_enable
);
  import bittide_pkg::*;

  localparam int unsigned CW = $clog2(STABLE_CYCLES + 1);

  logic [CW-1:0] stable_cnt;
  logic          all_up;

  assign all_up = ((link_up & link_mask) == link_mask);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= BOOT_CLOCK_PROGRAM;
      stable_cnt <= '0;
    end else begin
      unique case (state)
        BOOT_CLOCK_PROGRAM: if (clock_ready) state <= BOOT_LINK_WAIT;
        BOOT_LINK_WAIT: begin
          if (!all_up) begin
            stable_cnt <= '0;
          end else if (stable_cnt == CW'(STABLE_CYCLES - 1)) begin
            state <= BOOT_WAIT_TRIGGER;
          end else begin
            stable_cnt <= stable_cnt + 1'b1;
          end
        end
        BOOT_WAIT_TRIGGER: begin
          if (!all_up) begin
            state      <= BOOT_LINK_WAIT;
            stable_cnt <= '0;
          end else if (trigger) begin
            state <= BOOT_SYNC;
          end
        end
        BOOT_SYNC: if (eb_request) state <= BOOT_RUN;
        BOOT_RUN:  ;
        default:   state <= BOOT_CLOCK_PROGRAM;
      endcase
    end
  end

  assign links_stable = (state == BOOT_WAIT_TRIGGER) || (state == BOOT_SYNC) || (state == BOOT_RUN);
  assign ddc_run      = (state == BOOT_SYNC) || (state == BOOT_RUN);
  assign cc_enable    = ddc_run;
  assign eb_enable    = (state == BOOT_RUN);
endmodule
