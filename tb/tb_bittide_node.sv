// tb_bittide_node: end-to-end run of the main configuration, eight nodes in a
// fully connected network, from reset through boot, clock synchronization and
// elastic-buffer operation (see bittide_network for the checks and the
// mechanism counts). Every node parameter is at its default except the
// link-stable wait, shortened from 500 ms to 4 ms of always-on clock so the
// run stays short; tb_bittide_node_full runs the unchanged design.
module tb_bittide_node;
  logic done;
  int   checks, failures;

  bittide_network #(.TOPO(0), .STABLE_CYCLES(500_000)) u_net (.done(done), .checks(checks), .failures(failures));

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
