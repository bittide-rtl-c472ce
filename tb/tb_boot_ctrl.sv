// tb_boot_ctrl: walks the boot sequencer through its phases with a short
// link-stable time: no progress before the clock board is ready; a link that
// drops restarts the stable count; the stable time is counted exactly; the
// trigger is ignored before the links are stable; clock control and the
// virtual buffers start on the trigger; the elastic buffers on eb_request.
module tb_boot_ctrl;
  import bittide_pkg::*;
  localparam int L = 7;
  localparam int STABLE = 20;
  logic clk = 1'b0, rst = 1'b1;
  logic clock_ready = 1'b0, trigger = 1'b0, eb_request = 1'b0;
  logic [L-1:0] link_up = '0, link_mask = 7'b0011011;
  boot_state_e state;
  logic links_stable, ddc_run, cc_enable, eb_enable;
  int checks = 0, failures = 0;
  int t_all_up;

  boot_ctrl #(.NUM_LINKS(L), .STABLE_CYCLES(STABLE)) dut (
    .clk(clk), .rst(rst), .clock_ready(clock_ready), .link_up(link_up), .link_mask(link_mask),
    .trigger(trigger), .eb_request(eb_request), .state(state), .links_stable(links_stable),
    .ddc_run(ddc_run), .cc_enable(cc_enable), .eb_enable(eb_enable)
  );

  always #5 clk = ~clk;

  task automatic expect_state(input boot_state_e s, input string what);
    checks++;
    if (state != s) begin failures++; $display("FAIL: %s: state %s", what, state.name()); end
  endtask

  task automatic tick(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    tick(2);
    rst = 1'b0;
    link_up = '1;
    tick(30);
    expect_state(BOOT_CLOCK_PROGRAM, "waits for the clock board");
    clock_ready = 1'b1;
    tick(1);
    expect_state(BOOT_LINK_WAIT, "clock board programmed");
    // only the masked links matter: an unused link going down changes nothing
    link_up[2] = 1'b0;
    tick(10);
    // a used link drops: the count restarts
    link_up[1] = 1'b0;
    tick(3);
    link_up[1] = 1'b1;
    trigger = 1'b1;               // too early, must be ignored
    tick(1);
    trigger = 1'b0;
    t_all_up = 0;
    while (state == BOOT_LINK_WAIT && t_all_up < 100) begin tick(1); t_all_up++; end
    checks++;
    if (t_all_up < STABLE - 1 || t_all_up > STABLE + 1) begin
      failures++; $display("FAIL: links stable after %0d cycles, expected %0d", t_all_up, STABLE);
    end
    expect_state(BOOT_WAIT_TRIGGER, "links stable");
    checks++; if (!links_stable || ddc_run || cc_enable || eb_enable) begin failures++; $display("FAIL: outputs in WAIT_TRIGGER"); end
    tick(5);
    expect_state(BOOT_WAIT_TRIGGER, "no trigger yet");
    trigger = 1'b1;
    tick(1);
    trigger = 1'b0;
    expect_state(BOOT_SYNC, "trigger");
    checks++; if (!ddc_run || !cc_enable || eb_enable) begin failures++; $display("FAIL: outputs in SYNC"); end
    tick(10);
    eb_request = 1'b1;
    tick(1);
    expect_state(BOOT_RUN, "eb request");
    checks++; if (!eb_enable || !cc_enable) begin failures++; $display("FAIL: outputs in RUN"); end
    // a link that drops before the trigger sends the node back to LINK_WAIT
    rst = 1'b1; eb_request = 1'b0; tick(1); rst = 1'b0;
    tick(STABLE + 5);
    expect_state(BOOT_WAIT_TRIGGER, "second boot");
    link_up[0] = 1'b0;
    tick(1);
    expect_state(BOOT_LINK_WAIT, "link lost before trigger");
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
