// tb_ddc: drives the receive and transmit clocks of a DDC at different rates
// and compares its occupancy with an independent count of frames arrived
// (receive edges) minus frames departed (transmit edges). First the receive
// clock is 1% faster, so the virtual buffer fills; then 2% slower, so it
// drains through zero (half full) to negative values.
module tb_ddc;
  localparam int N = 8;
  localparam int M = 56;
  localparam int W = 32;
  logic clk_rx = 1'b0, clk_tx = 1'b0, clk = 1'b0, rst = 1'b1;
  logic signed [W-1:0] occ;
  longint n_rx = 0, n_tx = 0, expected, diff, max_occ = 0, min_occ = 0;
  real rx_half = 4.0;
  int checks = 0, failures = 0;

  ddc #(.N(N), .M(M), .OUT_W(W)) dut (
    .clk_rx(clk_rx), .clk_tx(clk_tx), .clk(clk), .rst(rst), .occupancy(occ)
  );

  always #(rx_half) clk_rx = ~clk_rx;
  always #4.04 clk_tx = ~clk_tx;
  always #3.7 clk = ~clk;

  always @(posedge clk_rx) if (!dut.u_dc_rx.rst_in_dom) n_rx++;
  always @(posedge clk_tx) if (!dut.u_dc_tx.rst_in_dom) n_tx++;

  task automatic run(input int n);
    for (int i = 0; i < n; i++) begin
      @(posedge clk); #0.01;
      if (n_rx > 300 && n_tx > 300) begin
        expected = n_rx - n_tx;
        diff = expected - longint'(occ);
        checks++;
        if (diff < -7 || diff > 7) begin
          failures++;
          if (failures < 10) $display("FAIL: occupancy %0d, rx-tx %0d", occ, expected);
        end
        if (longint'(occ) > max_occ) max_occ = longint'(occ);
        if (longint'(occ) < min_occ) min_occ = longint'(occ);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #0.3 rst = 1'b0;
    run(20000);
    checks++;
    if (max_occ < 150) begin failures++; $display("FAIL: buffer did not fill (%0d)", max_occ); end
    rx_half = 4.12;
    run(40000);
    checks++;
    if (min_occ > -100) begin failures++; $display("FAIL: buffer did not drain below half (%0d)", min_occ); end
    $display("max %0d min %0d", max_occ, min_occ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
