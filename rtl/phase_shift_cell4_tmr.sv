// phase_shift_cell4_tmr -- triple-redundant 4-step clock phase shift cell.
//
// One replica is a ring of four flip-flops on CLK160. While SEL is high
// every flip-flop loads its control bit d[i]; while SEL is low the ring
// rotates. The last flip-flop is the regenerated 40 MHz clock, so after a
// load the output shows d[0], d[1], d[2], d[3] in four consecutive CLK160
// periods and then repeats: the bit pattern sets the phase (in 6.25 ns
// steps) and the duty cycle of CLK40. Example: d = 4'b0110 gives a 1:1 clock
// delayed by 6.25 ns from the load edge, d = 4'b1101 a 3:1 clock.
//
// The cell is built three times. In every stage the three multiplexer
// outputs are voted, and the voted value is what each replica's flip-flop
// captures, so a single upset flip-flop is repaired on the next CLK160
// edge. Each replica has its own clock, SEL and control bits (triple clock
// trees); clk40[r] is replica r's output.
//
// Ring order, mux/voter/flip-flop structure and the d[0]-first output order
// follow the design description; the flip-flops have no reset (their state
// is defined by the first SEL load), which is this design's choice.
//
// Timing: a load takes effect at the first clk edge at which sel is high;
// clk40 then shows d[0] for the following CLK160 period.
module phase_shift_cell4_tmr (
  input  logic [2:0]      clk,    // CLK160 (or its inverse), one per replica
  input  logic [2:0]      sel,    // load strobe, one per replica
  input  logic [2:0][3:0] d,      // control bits, one set per replica
  output logic [2:0]      clk40   // regenerated 40 MHz clock per replica
);

  logic [2:0][3:0] mux_o;  // stage multiplexer outputs of all replicas

  for (genvar r = 0; r < 3; r++) begin : g_rep
    logic [3:0] q;         // flip-flops of replica r; q[0] drives clk40
    logic [3:0] vote_o;    // voted flip-flop inputs

    // Stage i loads d[i] or takes the next stage up the ring, i+1 mod 4:
    // d[3] -> d[2] -> d[1] -> d[0] -> output -> back to the d[3] stage.
    assign mux_o[r] = sel[r] ? d[r] : {q[0], q[3:1]};

    tmr_voter #(.W(4)) u_vote (
      .i0 (mux_o[r]),
      .i1 (mux_o[(r + 1) % 3]),
      .i2 (mux_o[(r + 2) % 3]),
      .o  (vote_o)
    );

    always_ff @(posedge clk[r]) q <= vote_o;

    assign clk40[r] = q[0];
  end

endmodule
