// tmr_voter -- bitwise 2-out-of-3 majority voter.
//
// Each bit of `o` is high when at least two of i0, i1, i2 are high, so any
// single corrupted replica is outvoted. One voter sits in front of every
// flip-flop of every replica of the phase shifter (the VOTER boxes with
// pins i0, i1, i2, o of the triple-redundant cell). Purely combinational.
module tmr_voter #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] i0,
  input  logic [W-1:0] i1,
  input  logic [W-1:0] i2,
  output logic [W-1:0] o
);

  always_comb o = (i0 & i1) | (i0 & i2) | (i1 & i2);

endmodule
