// tb_clock_control: drives per-link occupancies that change only between
// samples and checks every decision against an independent model of the
// controller: c_rel = 0.25 * (sum of the selected links' occupancies),
// c_inc = sign(c_rel - c_est), c_est = sum of earlier c_inc. It checks the
// FINC/FDEC pulses (one cycle, never both), the c_est and beta_sum telemetry,
// the sample interval (SAMPLE_PERIOD cycles), that a constant occupancy makes
// c_est settle on k_p * sum and the pulses stop, and that nothing is sent
// while disabled.
module tb_clock_control;
  localparam int L  = 7;
  localparam int W  = 32;
  localparam int SP = 12;
  logic clk = 1'b0, rst = 1'b1, enable = 1'b0;
  logic [L-1:0] link_mask;
  logic signed [L-1:0][W-1:0] occ;
  logic finc, fdec, sample_valid;
  logic signed [W+2:0] beta_sum;
  logic signed [31:0] c_est;
  bittide_pkg::speed_change_e speed_change;

  int checks = 0, failures = 0;
  int model_est = 0, n_inc = 0, n_dec = 0, n_none = 0;
  longint cycle = 0, last_sample = -1;
  longint sum;
  real c_rel;
  int exp_dir;
  logic finc_q = 1'b0, fdec_q = 1'b0;

  clock_control #(.NUM_LINKS(L), .OCC_W(W), .SAMPLE_PERIOD(SP)) dut (
    .clk(clk), .rst(rst), .enable(enable), .link_mask(link_mask), .occupancy(occ),
    .finc(finc), .fdec(fdec), .beta_sum(beta_sum), .c_est(c_est),
    .speed_change(speed_change), .sample_valid(sample_valid)
  );

  always #5 clk = ~clk;

  task automatic new_inputs(input int mode);
    for (int j = 0; j < L; j++) begin
      case (mode)
        0: occ[j] = W'($signed($urandom_range(0, 400)) - 200);
        1: occ[j] = W'(6 * (j + 1));         // sum 168 over all links
        default: occ[j] = W'(-2000 + 50 * j);
      endcase
    end
  endtask

  // Checker, sampled just after each rising edge
  always @(posedge clk) begin
    #0.1;
    cycle++;
    checks++;
    if (finc && fdec) begin failures++; $display("FAIL: FINC and FDEC together"); end
    if (finc_q && finc) begin checks++; failures++; $display("FAIL: FINC longer than a cycle"); end
    if (fdec_q && fdec) begin checks++; failures++; $display("FAIL: FDEC longer than a cycle"); end
    finc_q = finc;
    fdec_q = fdec;
    if (!enable) begin
      checks++;
      if (finc || fdec || sample_valid) begin failures++; $display("FAIL: output while disabled"); end
    end
    if (sample_valid) begin
      if (last_sample >= 0) begin
        checks++;
        if (cycle - last_sample != SP) begin
          failures++; $display("FAIL: sample interval %0d", cycle - last_sample);
        end
      end
      last_sample = cycle;
      sum = 0;
      for (int j = 0; j < L; j++) if (link_mask[j]) sum += longint'($signed(occ[j]));
      c_rel = 0.25 * real'(sum);
      exp_dir = (c_rel > real'(model_est)) ? 1 : (c_rel < real'(model_est)) ? -1 : 0;
      model_est += exp_dir;
      checks += 4;
      if (longint'(beta_sum) != sum) begin failures++; $display("FAIL: beta_sum %0d expected %0d", beta_sum, sum); end
      if (finc != (exp_dir == 1) || fdec != (exp_dir == -1)) begin
        failures++; $display("FAIL: pulses inc=%0b dec=%0b expected %0d", finc, fdec, exp_dir);
      end
      if (int'(c_est) != model_est) begin failures++; $display("FAIL: c_est %0d expected %0d", c_est, model_est); end
      if ((exp_dir == 1 && speed_change != bittide_pkg::SPEED_INC) ||
          (exp_dir == -1 && speed_change != bittide_pkg::SPEED_DEC) ||
          (exp_dir == 0 && speed_change != bittide_pkg::SPEED_NONE)) begin
        failures++; $display("FAIL: speed_change");
      end
      if (exp_dir == 1) n_inc++; else if (exp_dir == -1) n_dec++; else n_none++;
    end
  end

  initial begin
    link_mask = '1;
    new_inputs(1);
    repeat (3) @(posedge clk);
    rst = 1'b0;
    repeat (5 * SP) @(posedge clk);      // disabled: nothing may happen
    enable = 1'b1;
    // constant positive occupancy: c_est climbs to 0.25 * 168 = 42 and stops
    repeat (60 * SP) @(posedge clk);
    #1 checks++;
    if (c_est != 42) begin failures++; $display("FAIL: c_est settled at %0d, expected 42", c_est); end
    checks++;
    if (n_none < 5) begin failures++; $display("FAIL: pulses did not stop"); end
    // large negative occupancy: c_est walks down
    @(posedge sample_valid);
    @(negedge clk);
    new_inputs(2);
    repeat (30 * SP) @(posedge clk);
    // random occupancies and random link masks, changed right after a sample
    for (int k = 0; k < 300; k++) begin
      @(posedge sample_valid);
      @(negedge clk);
      new_inputs(0);
      link_mask = L'($urandom);
    end
    checks++;
    if (n_inc == 0 || n_dec == 0) begin failures++; $display("FAIL: not both directions"); end
    $display("inc %0d dec %0d none %0d", n_inc, n_dec, n_none);
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
