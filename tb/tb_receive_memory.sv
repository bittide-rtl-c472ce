// tb_receive_memory: offers a frame (with a valid flag that is sometimes low)
// on every tick and checks, by reading the slots back, that slot t mod DEPTH
// holds the frame and valid flag of tick t for the most recent lap.
module tb_receive_memory;
  localparam int DEPTH = 64;
  localparam int FW = 64;
  logic clk = 1'b0, rst = 1'b1;
  logic [63:0] tick;
  logic rx_valid;
  logic [FW-1:0] rx_frame, rd_frame;
  logic [5:0] rd_addr = '0;
  logic rd_valid;
  logic [FW-1:0] model_f [DEPTH];
  logic model_v [DEPTH];
  int checks = 0, failures = 0;

  localtick_counter #(.W(64)) u_tick (.clk(clk), .rst(rst), .tick(tick));
  receive_memory #(.DEPTH(DEPTH), .FRAME_W(FW), .TICK_W(64)) dut (
    .clk(clk), .rst(rst), .tick(tick), .rx_valid(rx_valid), .rx_frame(rx_frame),
    .rd_addr(rd_addr), .rd_frame(rd_frame), .rd_valid(rd_valid)
  );

  always #4 clk = ~clk;

  // source: frame = tick * 3 + 7, invalid on every fifth tick
  always_comb begin
    rx_frame = tick * 3 + 7;
    rx_valid = (tick % 5) != 0;
  end

  always @(posedge clk) begin
    if (!rst) begin
      model_f[tick[5:0]] <= rx_frame;
      model_v[tick[5:0]] <= rx_valid;
    end
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) model_v[a] = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    repeat (3 * DEPTH + 5) @(posedge clk);
    #1;
    // the node keeps receiving while the processor reads; compare against the
    // model at the moment of each read
    for (int k = 0; k < 4 * DEPTH; k++) begin
      @(negedge clk);
      rd_addr = 6'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rd_valid != model_v[rd_addr] || (model_v[rd_addr] && rd_frame != model_f[rd_addr])) begin
        // a slot written in this very cycle is read before it changes
        if (rd_addr != 6'(tick - 1)) begin
          failures++;
          $display("FAIL: slot %0d read %h/%0b expected %h/%0b", rd_addr, rd_frame, rd_valid,
                   model_f[rd_addr], model_v[rd_addr]);
        end
      end
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
