// ext_counter: the Ext_{n,m} counter extender of a domain counter.
//
// Takes the N-bit wrapping count c (already in the always-on domain) and
// returns an (N+M)-bit count x:c, where the upper part x counts how often c
// has wrapped. A wrap is seen as a falling edge of the MSB of c: a register
// holds the previous MSB and ovf = previous MSB and not current MSB. The
// two-state Mealy machine follows the paper's figure:
//
//   WAIT_FIRST --  !ovf : output 0
//              --   ovf : output 0:c, x := 0, go to COUNT
//   COUNT      --  !ovf : output x:c
//              --   ovf : x := x+1, output x:c with the incremented x
//
// The figure prints "x:c" on the last transition. Taken with the output
// formed from the old x, the count would step back by 2^N for one cycle at
// every wrap, since c has already wrapped when ovf is seen; this design
// therefore outputs the incremented x in that cycle, so that the extended
// count never decreases. Sampling c at least twice per 2^(N-1) counts is
// required for no wrap to be missed.
//
// Interface: clk/rst (always-on domain), c (N bits), ext (N+M bits, Mealy
// output, combinational from c and the state).
module ext_counter #(
  parameter int unsigned N = bittide_pkg::DC_N,
  parameter int unsigned M = bittide_pkg::DC_M
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [N-1:0]   c,
  output logic [N+M-1:0] ext
);
  typedef enum logic {WAIT_FIRST, COUNT} ext_state_e;

  ext_state_e   state;
  logic [M-1:0] x;
  logic         msb_prev;
  logic         ovf;

  // falling edge detector on msb(c)
  assign ovf = msb_prev & ~c[N-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= WAIT_FIRST;
      x        <= '0;
      msb_prev <= 1'b0;
    end else begin
      msb_prev <= c[N-1];
      if (ovf) begin
        if (state == WAIT_FIRST) begin
          state <= COUNT;
          x     <= '0;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end

  always_comb begin
    unique case (state)
      WAIT_FIRST: ext = ovf ? {{M{1'b0}}, c} : '0;
      COUNT:      ext = ovf ? {x + 1'b1, c} : {x, c};
      default:    ext = '0;
    endcase
  end
endmodule
