// pad_tds_pkg -- constants, types and helper functions shared by the pad
// trigger time-alignment design.
//
// The numbers that come from the design description are: 104 pad channels,
// a 25 ns bunch-crossing (BC) period divided into 8 steps of 3.125 ns, a
// 160 MHz global clock (4 clock periods per BC), 5 control bits per channel
// (d[4:0]), a 12-bit BCID, a 120-bit frame per BC (4.8 Gbps x 25 ns) and a
// bunch-crossing-reset (BCR) period of 3580 BCs. The frame layout (4-bit
// header, 12-bit BCID, 104 hit bits) and the header value are this design's
// own choice.
package pad_tds_pkg;

  localparam int unsigned N_CH        = 104;   // pad channels per chip
  localparam int unsigned N_STEP      = 8;     // delay steps per BC
  localparam int unsigned SLOTS_PER_BC = 4;    // CLK160 periods per BC
  localparam int unsigned CTRL_W      = 5;     // control bits d[4:0]
  localparam int unsigned BCID_W      = 12;    // bunch-crossing identifier
  localparam int unsigned HDR_W       = 4;     // frame header (own choice)
  localparam int unsigned FRAME_W     = 120;   // bits per BC at 4.8 Gbps
  localparam int unsigned BCR_PERIOD  = 3580;  // BCs between two BCRs
  localparam logic [HDR_W-1:0] FRAME_HEADER = 4'b1010; // own choice

  // Control bits of one phase shifter: d[4] picks the cell running on the
  // rising (1) or falling (0) edge of CLK160; d[3:0] is the 4-slot pattern
  // shifted out starting with d[0].
  typedef logic [CTRL_W-1:0] phase_ctrl_t;

  // Control word for a delay of `step` x 3.125 ns with a 1:1 duty cycle.
  // The pattern is high in slots k and k+1 (mod 4), k = step/2, so the
  // rising edge of the regenerated clock is k x 6.25 ns after the reference
  // edge; odd steps use the falling-edge cell for another 3.125 ns.
  // step 0 -> 5'b10011, 2 -> 5'b10110, 3 -> 5'b00110, 7 -> 5'b01001.
  function automatic phase_ctrl_t step_to_ctrl(input logic [2:0] step);
    logic [1:0] k;
    logic [3:0] pat;
    k   = step[2:1];
    pat = '0;
    pat[k]        = 1'b1;
    pat[k + 2'd1] = 1'b1;
    return {~step[0], pat};
  endfunction

endpackage
