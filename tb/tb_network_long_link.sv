// tb_network_long_link: end-to-end run of the fully connected network in which
// the link pair between nodes 0 and 2 is a 2 km fibre: 631 frames one way
// (16 + 615) instead of 16. Node parameters are the defaults except the
// link-stable wait (500,000 cycles); see bittide_network for the checks, which
// here include the round trip of the long link being 2 x 615 frames longer.
module tb_network_long_link;
  logic done;
  int   checks, failures;

  bittide_network #(.TOPO(0), .LONG_LATENCY(631), .STABLE_CYCLES(500_000)) u_net (.done(done), .checks(checks), .failures(failures));

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
