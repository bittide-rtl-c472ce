// tb_reset_sync: checks that the reset synchronizer asserts at once and
// releases exactly STAGES clock edges after its input is released.
module tb_reset_sync;
  logic clk = 1'b0, rst_in = 1'b1, rst_out;
  int checks = 0, failures = 0;

  reset_sync #(.STAGES(2)) dut (.clk(clk), .rst_in(rst_in), .rst_out(rst_out));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 check(rst_out == 1'b1, "held in reset");
    rst_in = 1'b0;
    @(posedge clk); #1 check(rst_out == 1'b1, "still in reset after 1 edge");
    @(posedge clk); #1 check(rst_out == 1'b0, "released after 2 edges");
    repeat (4) begin @(posedge clk); #1 check(rst_out == 1'b0, "stays released"); end
    // asynchronous assertion between clock edges
    #2 rst_in = 1'b1;
    #0.5 check(rst_out == 1'b1, "asserts without a clock edge");
    #1 rst_in = 1'b0;
    @(posedge clk); #1 check(rst_out == 1'b1, "release is synchronous (1)");
    @(posedge clk); #1 check(rst_out == 1'b0, "release is synchronous (2)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
