// clock_board_model: behavioural model of the adjustable clock board.
// Behavioural model only, not synthesizable.
//
// Stands in for the external clock synthesizer that drives a bittide node.
// Its oscillator runs OFFSET_PPM away from the nominal period (manufacturing
// spread); every rising edge on finc raises the frequency by one step of
// STEP_PPM and every rising edge on fdec lowers it by one step, so that the
// output frequency is f_nom * (1 + OFFSET) * (1 + STEP * (n_inc - n_dec)).
// Edges are scheduled from an accumulated real-valued phase, so the average
// frequency is exact even though each edge is rounded to the simulator's time
// precision.
//
// Interface: finc, fdec (pulses from the node), clk (generated clock);
// rel_ppm() gives the present frequency offset from nominal in ppm.
module clock_board_model #(
  parameter real NOMINAL_NS = 8.0,
  parameter real OFFSET_PPM = 0.0,
  parameter real STEP_PPM   = 0.01,
  parameter real START_NS   = 0.0
) (
  input  logic finc,
  input  logic fdec,
  output logic clk
);
  int  steps = 0;
  int  n_inc = 0;
  int  n_dec = 0;
  real t_next;

  always @(posedge finc) begin steps++; n_inc++; end
  always @(posedge fdec) begin steps--; n_dec++; end

  function automatic real factor();
    return (1.0 + OFFSET_PPM * 1.0e-6) * (1.0 + STEP_PPM * 1.0e-6 * real'(steps));
  endfunction

  function automatic real rel_ppm();
    return (factor() - 1.0) * 1.0e6;
  endfunction

  initial begin
    clk = 1'b0;
    t_next = START_NS + NOMINAL_NS / 2.0;
    forever begin
      #(t_next - $realtime);
      clk = ~clk;
      t_next = t_next + NOMINAL_NS / (2.0 * factor());
    end
  end
endmodule
