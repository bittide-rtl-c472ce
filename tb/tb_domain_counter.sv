// tb_domain_counter: counts the edges of the counted clock independently and
// checks that the domain counter's signed output reads 0 until the first wrap,
// then follows (edges - 2^N) within the few cycles of synchronizer lag, never
// decreasing, while the counted clock changes from faster to slower than the
// always-on clock.
module tb_domain_counter;
  localparam int N = 8;
  localparam int M = 56;
  logic clk_in = 1'b0, clk = 1'b0, rst = 1'b1;
  logic signed [N+M:0] count, prev;
  longint edges = 0, expected, diff;
  real in_half = 4.0;
  int checks = 0, failures = 0, wrapped = 0;

  domain_counter #(.N(N), .M(M)) dut (.clk_in(clk_in), .clk(clk), .rst(rst), .count(count));

  always #(in_half) clk_in = ~clk_in;
  always #3.5 clk = ~clk;

  // edges the wrapping counter really counts (out of its synchronized reset)
  always @(posedge clk_in) if (!dut.rst_in_dom) edges++;

  task automatic run(input int n);
    for (int i = 0; i < n; i++) begin
      @(posedge clk); #0.01;
      expected = edges - (64'd1 << N);
      checks++;
      if (count < prev) begin failures++; $display("FAIL: count went back %0d -> %0d", prev, count); end
      if (expected < 0) begin
        checks++;
        if (count != 0 && expected < -8) begin failures++; $display("FAIL: nonzero %0d before first wrap", count); end
      end else if (expected > 8) begin
        wrapped = 1;
        diff = expected - longint'(count);
        checks++;
        if (diff < 0 || diff > 6) begin
          failures++;
          if (failures < 10) $display("FAIL: count %0d, edges-2^N %0d", count, expected);
        end
      end
      prev = count;
    end
  endtask

  initial begin
    prev = '0;
    repeat (3) @(posedge clk);
    #0.3 rst = 1'b0;
    run(3000);
    in_half = 2.9;   // counted clock now faster than the always-on clock
    run(3000);
    checks++;
    if (!wrapped) begin failures++; $display("FAIL: never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
