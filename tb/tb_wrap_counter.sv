// tb_wrap_counter: checks that Wrap_N counts one per clock from 0 and wraps
// from 2^N-1 to 0, against an independent integer count.
module tb_wrap_counter;
  localparam int N = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic [N-1:0] count;
  int checks = 0, failures = 0;
  int cycles = 0;
  int wraps = 0;

  wrap_counter #(.N(N)) dut (.clk(clk), .rst(rst), .count(count));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    checks++; if (count != 0) begin failures++; $display("FAIL reset value %0d", count); end
    for (int i = 1; i <= 700; i++) begin
      @(posedge clk); #1;
      cycles++;
      checks++;
      if (int'(count) != (i % (1 << N))) begin
        failures++;
        $display("FAIL cycle %0d: count %0d expected %0d", i, count, i % (1 << N));
      end
      if (count == 0) wraps++;
    end
    checks++; if (wraps != 700 / (1 << N)) begin failures++; $display("FAIL wraps %0d", wraps); end
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
