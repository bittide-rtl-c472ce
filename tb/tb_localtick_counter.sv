// tb_localtick_counter: checks that the localtick starts at 0 after reset,
// advances by exactly one per node clock and restarts on a new reset.
module tb_localtick_counter;
  logic clk = 1'b0, rst = 1'b1;
  logic [63:0] tick;
  int checks = 0, failures = 0;

  localtick_counter #(.W(64)) dut (.clk(clk), .rst(rst), .tick(tick));

  always #4 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    checks++; if (tick != 0) begin failures++; $display("FAIL: reset value %0d", tick); end
    for (int i = 1; i <= 1000; i++) begin
      @(posedge clk); #1;
      checks++;
      if (tick != 64'(i)) begin failures++; $display("FAIL: tick %0d expected %0d", tick, i); end
    end
    rst = 1'b1;
    @(posedge clk); #1;
    checks++; if (tick != 0) begin failures++; $display("FAIL: no restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
