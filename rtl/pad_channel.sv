// pad_channel -- leading-edge hit capture of one pad channel in the
// channel's own, phase-shifted BC clock.
//
// The time-over-threshold (TOT) pulse of a pad is assigned to the BC whose
// window contains its leading edge. Here the windows are those of the
// channel clock clk40, so delaying clk40 by m x 3.125 ns delays the windows
// by the same amount and compensates a later-arriving channel.
//
// How: a toggle flip-flop is clocked by the TOT leading edge itself. On
// each rising edge of clk40 the toggle state is sampled, and `hit` is the
// difference between the last two samples: it is high for one channel BC
// (from one clk40 rising edge to the next) when a leading edge arrived in
// the BC window that just ended. One pulse per BC window is assumed (two
// edges in one window cancel).
//
// The capture is built three times, each copy on its own replica of the
// channel clock, and the three hit bits are voted.
//
// That each channel is time-stamped with its own BC clock from the leading
// edge follows the design description; the toggle-and-sample circuit is
// this design's choice (no metastability synchronizer is modelled: the
// leading edge is asynchronous to clk40 by nature and a real chip would
// need one, at the cost of a fixed extra BC of latency).
//
// Timing: a leading edge in [t_n, t_n+1), t_n the n-th clk40 rising edge,
// gives hit = 1 during [t_n+1, t_n+2). There is no reset: the toggle state
// itself carries no information, and `hit` is meaningful from the second
// clk40 rising edge after power-up.
module pad_channel (
  input  logic [2:0] clk40,  // channel BC clock, one per replica
  input  logic       tot,    // TOT pulse from the discriminator
  output logic       hit     // voted: leading edge in the last channel BC
);

  logic [2:0] h;  // per-replica hit

  for (genvar r = 0; r < 3; r++) begin : g_rep
    logic tog, samp, samp_d;

    always_ff @(posedge tot) tog <= ~tog;

    always_ff @(posedge clk40[r]) begin
      samp   <= tog;
      samp_d <= samp;
    end

    assign h[r] = samp ^ samp_d;
  end

  tmr_voter #(.W(1)) u_vote (.i0(h[0]), .i1(h[1]), .i2(h[2]), .o(hit));

endmodule
