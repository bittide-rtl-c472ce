// tb_bittide_node_full: the same end-to-end run as tb_bittide_node, eight nodes
// fully connected, but with every node at its default parameters, including
// the full 500 ms link-stable wait (62.5 million always-on cycles, which the
// harness clocks fast). Takes about six minutes of simulator time.
module tb_bittide_node_full;
  logic done;
  int   checks, failures;

  bittide_network #(.TOPO(0)) u_net (.done(done), .checks(checks), .failures(failures));

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
