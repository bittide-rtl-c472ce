// tb_network_hourglass: end-to-end run of the hourglass topology, two fully
// connected groups of four nodes joined by one link (nodes 3 and 4). Node
// parameters are the defaults except the link-stable wait (500,000 cycles);
// see bittide_network for the sequence and the checks.
// The two halves are joined by one link only, so with the harness's coarse
// 4 ppm clock-board step the spread settles into a 14-20 ppm dither instead of
// the fully connected network's 5-12 ppm: the convergence limit is 24 ppm here
// (from 130 ppm at the start), and the sync phase is 16 ms.
module tb_network_hourglass;
  logic done;
  int   checks, failures;

  bittide_network #(.TOPO(1), .LONG_LATENCY(0), .SYNC_US(16000), .SPREAD_LIMIT_PPM(24.0),
                   .STABLE_CYCLES(500_000)) u_net (.done(done), .checks(checks), .failures(failures));

  initial begin
    #1;
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
