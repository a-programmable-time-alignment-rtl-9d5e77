// pad_channel_tb -- checks leading-edge hit capture in the channel clock.
//
// Time unit 1 ps. The three replicas of the channel BC clock are generated
// here (25 ns period, rising at 7 x 3125 ps + n x 25 ns, i.e. the channel
// delayed by 7 steps). TOT pulses of 4-15 ns are placed at random in
// randomly chosen BC windows, at least 200 ps from a clock edge. For every
// window w the testbench knows whether a leading edge fell in it, and in
// the middle of window w+1 it checks that `hit` equals that. Part of the
// run repeats with the capture flip-flops of one replica inverted at random
// (single-event upsets), which the vote must hide.
module pad_channel_tb;
  timeunit 1ps;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  localparam longint PHASE = 7 * 3125;
  localparam int     NWIN  = 400;

  logic       clk = 1'b0;
  logic       tot = 1'b0;
  logic       hit;
  bit         edge_in [NWIN + 2];
  int         win = -1;            // index of the current window
  bit         seu_on = 1'b0;

  pad_channel dut (.clk40({3{clk}}), .tot(tot), .hit(hit));

  // channel clock: window w is [PHASE + w*25000, PHASE + (w+1)*25000)
  initial begin
    #PHASE;
    forever begin
      clk = 1'b1; win++;
      #12500;
      clk = 1'b0;
      #12500;
    end
  end

  initial begin
    #((NWIN + 20) * 25000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse generator: at most one leading edge per window
  initial begin
    for (int w = 0; w < NWIN; w++) begin
      longint t_start, off, width;
      t_start = PHASE + longint'(w) * 25000;
      if ($time > t_start) begin edge_in[w] = 1'b0; continue; end
      #(t_start - $time);
      if ($urandom_range(0, 2) == 0) begin edge_in[w] = 1'b0; continue; end
      off   = longint'($urandom_range(200, 24800));
      width = longint'($urandom_range(4000, 15000));
      edge_in[w] = 1'b1;
      #off;
      tot = 1'b1;
      #width;
      tot = 1'b0;
    end
  end

  // in the middle of window w+1 check window w; optionally upset a replica
  always @(negedge clk) begin
    if (win >= 2 && win <= NWIN) begin
      checks++;
      if (hit !== edge_in[win - 1]) begin
        failures++;
        if (failures <= 20) $display("FAIL window %0d: hit %b expected %b", win - 1, hit, edge_in[win - 1]);
      end
    end
    if (win == NWIN / 2) seu_on = 1'b1;
    if (seu_on && win < NWIN - 2) begin
      case ($urandom_range(0, 5))
        0: dut.g_rep[0].samp = ~dut.g_rep[0].samp;
        1: dut.g_rep[1].samp = ~dut.g_rep[1].samp;
        2: dut.g_rep[2].samp = ~dut.g_rep[2].samp;
        default: ;
      endcase
    end
    if (win == NWIN + 1) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
