// bittide_pkg: types and default sizes shared by the bittide node.
//
// A bittide node counts frames on every incoming link and steers its own
// oscillator so that, averaged over time, all nodes tick at the same rate.
// This package holds the sizes the rest of the RTL is built around. The
// values marked "paper" are those of the published 8-node FPGA prototype:
// 7 links per node, 64-bit frames, 8-bit wrapping domain counters extended
// by 56 bits, a 32-bit signed occupancy, and 32-deep elastic buffers started
// at 18 entries. The rest are this design's own choices.
package bittide_pkg;

  // paper: each node has 7 incoming and 7 outgoing links
  localparam int unsigned NUM_LINKS = 7;
  // paper: each frame carries 64 bits of useful data
  localparam int unsigned FRAME_W = 64;
  // paper: DC_{8,56}, extended counters of 64 bits
  localparam int unsigned DC_N = 8;
  localparam int unsigned DC_M = 56;
  // paper: occupancy truncated to a 32-bit signed number, 0 = half full
  localparam int unsigned OCC_W = 32;
  // paper: elastic buffers are 32 deep, started at half full + 2 = 18
  localparam int unsigned EB_DEPTH = 32;
  localparam int unsigned EB_START_FILL = 18;
  // own choice: width of the accumulated FINC/FDEC step count
  localparam int unsigned CEST_W = 32;

  typedef logic [FRAME_W-1:0] frame_t;
  typedef logic signed [OCC_W-1:0] occ_t;

  // c_inc in {-1, 0, +1}: the clock modification direction of one sample
  typedef enum logic [1:0] {
    SPEED_NONE = 2'd0,
    SPEED_INC  = 2'd1,
    SPEED_DEC  = 2'd2
  } speed_change_e;

  // Bring-up phases of a node (own encoding of the paper's boot sequence)
  typedef enum logic [2:0] {
    BOOT_CLOCK_PROGRAM = 3'd0,  // clock board being programmed
    BOOT_LINK_WAIT     = 3'd1,  // waiting for all used links to stay up
    BOOT_WAIT_TRIGGER  = 3'd2,  // links stable, waiting for the shared start
    BOOT_SYNC          = 3'd3,  // domain difference counters + clock control run
    BOOT_RUN           = 3'd4   // elastic buffers carry data as well
  } boot_state_e;

endpackage
