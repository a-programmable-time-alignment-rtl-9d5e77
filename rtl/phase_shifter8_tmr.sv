// phase_shifter8_tmr -- triple-redundant 8-step (3.125 ns) BC clock phase
// shifter for one pad channel.
//
// Two 4-step cells hold the same pattern d[3:0]: one runs on the rising
// edge of CLK160, the other on the inverted CLK160, so its output lags by
// half a CLK160 period (3.125 ns). Control bit d[4] selects the rising-edge
// cell (1) or the falling-edge cell (0). With 1:1 patterns this gives eight
// phases of the 40 MHz channel clock spaced by 3.125 ns; see
// pad_tds_pkg::step_to_ctrl. Each replica r has its own output multiplexer
// driven by its own d[4]; in total 2 x 4 x 3 = 24 flip-flops.
//
// Load timing: sel_rise must be high for the one CLK160 period that ends at
// the reference 40 MHz rising edge; sel_fall for the period that follows
// it. Both cells then load at edges in a fixed relation to the BC reference
// and, for d[4] = 1, the channel clock rises k x 6.25 ns after the
// reference edge (k = position of the first 1 of d[3:0]); for d[4] = 0 it
// rises 3.125 ns later. Having two load strobes (sel_fall one CLK160
// period after sel_rise) is this design's choice, made so that the
// falling-edge cell lags rather than leads the rising-edge cell.
module phase_shifter8_tmr
  import pad_tds_pkg::*;
(
  input  logic [2:0]              clk160,   // one per clock tree
  input  logic [2:0]              sel_rise, // load strobe, rising-edge cell
  input  logic [2:0]              sel_fall, // load strobe, falling-edge cell
  input  phase_ctrl_t [2:0]       d,        // d[4:0] per replica
  output logic [2:0]              clk40     // channel BC clock per replica
);

  logic [2:0]      clk160_n;
  logic [2:0][3:0] pat;
  logic [2:0]      clk40_r;
  logic [2:0]      clk40_f;

  for (genvar r = 0; r < 3; r++) begin : g_rep
    assign clk160_n[r] = ~clk160[r];
    assign pat[r]      = d[r][3:0];
    // Output clock multiplexer of replica r.
    assign clk40[r]    = d[r][4] ? clk40_r[r] : clk40_f[r];
  end

  phase_shift_cell4_tmr u_rise (
    .clk   (clk160),
    .sel   (sel_rise),
    .d     (pat),
    .clk40 (clk40_r)
  );

  phase_shift_cell4_tmr u_fall (
    .clk   (clk160_n),
    .sel   (sel_fall),
    .d     (pat),
    .clk40 (clk40_f)
  );

endmodule
