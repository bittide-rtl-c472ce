// tb_gray_sync: a free-running counter in one clock domain is carried by
// gray_sync into an unrelated faster and then slower clock domain. Every value
// seen must be one the source really held within the last few source cycles,
// and the sequence seen must never go backwards.
module tb_gray_sync;
  localparam int N = 8;
  logic src_clk = 1'b0, dst_clk = 1'b0, src_rst = 1'b1, dst_rst = 1'b1;
  logic [N-1:0] src_count, dst_count, prev_dst;
  real dst_half = 3.1;
  int checks = 0, failures = 0;

  wrap_counter #(.N(N)) u_cnt (.clk(src_clk), .rst(src_rst), .count(src_count));
  gray_sync #(.N(N)) dut (
    .src_clk(src_clk), .src_rst(src_rst), .src_count(src_count),
    .dst_clk(dst_clk), .dst_rst(dst_rst), .dst_count(dst_count)
  );

  always #4 src_clk = ~src_clk;
  always #(dst_half) dst_clk = ~dst_clk;

  task automatic sample_phase(input int n);
    for (int i = 0; i < n; i++) begin
      @(posedge dst_clk); #0.01;
      checks++;
      // distance from the value seen to the live source count (mod 2^N)
      if (N'(src_count - dst_count) > N'(5)) begin
        failures++;
        $display("FAIL: seen %0d while source is %0d", dst_count, src_count);
      end
      checks++;
      if (N'(dst_count - prev_dst) > N'(4)) begin
        failures++;
        $display("FAIL: seen value jumped from %0d to %0d", prev_dst, dst_count);
      end
      prev_dst = dst_count;
    end
  endtask

  initial begin
    prev_dst = '0;
    repeat (3) @(posedge src_clk);
    src_rst = 1'b0;
    dst_rst = 1'b0;
    repeat (3) @(posedge dst_clk);
    prev_dst = dst_count;
    sample_phase(2000);   // destination faster than source
    dst_half = 5.3;
    sample_phase(1000);   // destination slower than source
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
