// tb_network_cube: end-to-end run of the cube topology, three links per node.
// Node parameters are the defaults except the link-stable wait (500,000
// cycles); the sync phase is 16 ms because three links give a smaller loop
// gain than seven. See bittide_network for the sequence and the checks.
module tb_network_cube;
  logic done;
  int   checks, failures;

  bittide_network #(.TOPO(2), .LONG_LATENCY(0), .SYNC_US(16000), .STABLE_CYCLES(500_000)) u_net (.done(done), .checks(checks), .failures(failures));

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
