// tb_send_memory: the processor side writes a frame into every slot; the
// check is that the frame sent one cycle after tick t is the one written into
// slot t mod DEPTH, over several laps of the ring, including a slot rewritten
// while the ring runs.
module tb_send_memory;
  localparam int DEPTH = 64;
  localparam int FW = 64;
  logic clk = 1'b0, rst = 1'b1;
  logic [63:0] tick;
  logic wr_en = 1'b0;
  logic [5:0] wr_addr = '0;
  logic [FW-1:0] wr_frame = '0, tx_frame;
  logic [FW-1:0] model [DEPTH];
  logic [63:0] prev_tick;
  int checks = 0, failures = 0;

  localtick_counter #(.W(64)) u_tick (.clk(clk), .rst(rst), .tick(tick));
  send_memory #(.DEPTH(DEPTH), .FRAME_W(FW), .TICK_W(64)) dut (
    .clk(clk), .rst(rst), .tick(tick), .wr_en(wr_en), .wr_addr(wr_addr),
    .wr_frame(wr_frame), .tx_frame(tx_frame)
  );

  always #4 clk = ~clk;

  initial begin
    // fill the ring while the tick counter is held in reset
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = 6'(a); wr_frame = {32'hC0DE_0000 | 32'(a), $urandom};
      model[a] = wr_frame;
    end
    @(negedge clk);
    wr_en = 1'b0;
    rst = 1'b0;
    @(posedge clk); #1;
    prev_tick = tick;
    for (int i = 0; i < 4 * DEPTH; i++) begin
      // rewrite one slot well ahead of its turn
      @(negedge clk);
      if (i == 100) begin
        wr_en = 1'b1; wr_addr = 6'(tick + 20); wr_frame = 64'hFEED_FACE_0000_0001;
        model[6'(tick + 20)] = wr_frame;
      end else begin
        wr_en = 1'b0;
      end
      @(posedge clk); #1;
      checks++;
      if (tx_frame != model[prev_tick[5:0]]) begin
        failures++;
        $display("FAIL: tick %0d sent %h expected %h", prev_tick, tx_frame, model[prev_tick[5:0]]);
      end
      prev_tick = tick;
    end
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
