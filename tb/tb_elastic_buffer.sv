// tb_elastic_buffer: writes an incrementing frame sequence on every receive
// clock and checks the read side: no data before START_FILL frames are in the
// buffer, then one frame per node clock in order with no gap or repeat while
// the clocks match. It then speeds up the reader until the buffer underflows
// and, after a reset, speeds up the writer until it overflows, and checks
// both sticky flags.
module tb_elastic_buffer;
  localparam int DEPTH = 32;
  localparam int START = 18;
  localparam int FW    = 64;
  logic wr_clk = 1'b0, rd_clk = 1'b0, wr_rst = 1'b1, rd_rst = 1'b1;
  logic wr_valid = 1'b0;
  logic [FW-1:0] wr_frame = '0, rd_frame;
  logic rd_valid, rd_running, rd_underflow, wr_overflow;
  logic [5:0] rd_occupancy;
  real wr_half = 4.0, rd_half = 4.0;
  longint written = 0, expected_next = 0, reads = 0;
  int checks = 0, failures = 0;
  logic prev_running = 1'b0;
  int gaps = 0;

  elastic_buffer #(.DEPTH(DEPTH), .START_FILL(START), .FRAME_W(FW)) dut (
    .wr_clk(wr_clk), .wr_rst(wr_rst), .wr_valid(wr_valid), .wr_frame(wr_frame),
    .wr_overflow(wr_overflow),
    .rd_clk(rd_clk), .rd_rst(rd_rst), .rd_frame(rd_frame), .rd_valid(rd_valid),
    .rd_running(rd_running), .rd_occupancy(rd_occupancy), .rd_underflow(rd_underflow)
  );

  always #(wr_half) wr_clk = ~wr_clk;
  always #(rd_half) rd_clk = ~rd_clk;

  // writer: one frame per receive clock, frame value = sequence number
  always @(posedge wr_clk) begin
    if (wr_rst) begin
      wr_valid <= 1'b0;
      wr_frame <= '0;
    end else begin
      wr_valid <= 1'b1;
      if (wr_valid && !dut.full) begin
        wr_frame <= wr_frame + 1;
        written  <= written + 1;
      end
    end
  end

  // reader-side checker
  always @(posedge rd_clk) begin
    if (!rd_rst) begin
      if (rd_running && !prev_running) begin
        checks++;
        if (rd_occupancy < 6'(START) || written < START) begin
          failures++;
          $display("FAIL: started at occupancy %0d with %0d written", rd_occupancy, written);
        end
      end
      if (rd_valid) begin
        checks++;
        if (rd_frame != FW'(expected_next)) begin
          failures++;
          if (failures < 10) $display("FAIL: frame %0d expected %0d", rd_frame, expected_next);
        end
        expected_next = longint'(rd_frame) + 1;
        reads++;
      end else if (prev_running && rd_running && !rd_underflow) begin
        gaps++;
      end
      prev_running = rd_running;
    end
  end

  initial begin
    repeat (4) @(posedge wr_clk);
    wr_rst = 1'b0;
    rd_rst = 1'b0;
    // the buffer must not deliver anything before it is filled
    repeat (10) @(posedge rd_clk);
    #0.1 checks++;
    if (rd_running || reads != 0) begin failures++; $display("FAIL: read before fill"); end
    repeat (3000) @(posedge rd_clk);
    #0.1;
    checks++;
    if (reads < 2900) begin failures++; $display("FAIL: only %0d reads", reads); end
    checks++;
    if (gaps != 0 || rd_underflow || wr_overflow) begin
      failures++; $display("FAIL: gaps %0d underflow %0d overflow %0d", gaps, rd_underflow, wr_overflow);
    end
    checks++;
    if (rd_occupancy < 6'd16 || rd_occupancy > 6'd24) begin
      failures++; $display("FAIL: occupancy %0d far from start fill", rd_occupancy);
    end
    // reader 5% faster: the buffer drains and underflows
    rd_half = 3.8;
    repeat (2000) @(posedge rd_clk);
    #0.1 checks++;
    if (!rd_underflow) begin failures++; $display("FAIL: no underflow"); end
    checks++;
    if (wr_overflow) begin failures++; $display("FAIL: spurious overflow"); end
    // restart, with the writer 5% faster: the buffer fills and overflows
    wr_rst = 1'b1; rd_rst = 1'b1;
    rd_half = 4.2;
    repeat (4) @(posedge rd_clk);
    expected_next = 0;
    prev_running = 1'b0;
    wr_rst = 1'b0; rd_rst = 1'b0;
    #0.1 checks++;
    if (rd_underflow || wr_overflow) begin failures++; $display("FAIL: flags survive reset"); end
    repeat (2000) @(posedge rd_clk);
    #0.1 checks++;
    if (!wr_overflow) begin failures++; $display("FAIL: no overflow"); end
    checks++;
    if (rd_underflow) begin failures++; $display("FAIL: spurious underflow"); end
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
