// tb_ext_counter: feeds Ext_{N,M} a wrapping N-bit count that advances by a
// random 0..3 per cycle and compares its output with an independent model:
// 0 until the count first wraps, afterwards (wraps - 1) * 2^N + c, where
// wraps is the number of wraps so far.
module tb_ext_counter;
  localparam int N = 8;
  localparam int M = 56;
  logic clk = 1'b0, rst = 1'b1;
  logic [N-1:0]   c;
  logic [N+M-1:0] ext;
  longint unsigned total, start, wraps, expected;
  int checks = 0, failures = 0, wrap_events = 0;

  ext_counter #(.N(N), .M(M)) dut (.clk(clk), .rst(rst), .c(c), .ext(ext));

  always #5 clk = ~clk;

  initial begin
    start = 64'd200;
    total = start;
    c = N'(total);
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int i = 0; i < 20000; i++) begin
      #1;
      wraps = (total >> N) - (start >> N);
      expected = (wraps == 0) ? 64'd0 : ((wraps - 1) << N) + (total & ((64'd1 << N) - 1));
      checks++;
      if (64'(ext) != expected) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d: ext %0d expected %0d", i, ext, expected);
      end
      @(posedge clk);
      #1;
      if (((total + 0) >> N) != ((total + 3) >> N)) wrap_events++;
      total = total + 64'($urandom_range(0, 3));
      c = N'(total);
    end
    checks++;
    if (wrap_events < 50) begin failures++; $display("FAIL: too few wraps exercised"); end
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
