// phase_shifter8_tmr_tb -- measures the eight phases of the 8-step shifter.
//
// Time unit 1 ps. CLK160 has a 6250 ps period; the reference 40 MHz edge
// is taken as a CLK160 rising edge t_L. sel_rise is driven high for the
// CLK160 period before t_L and sel_fall for the period after it, the way
// the load synchronizer drives them. For each step m = 0..7 the control
// word is taken from a table written here from the published examples
// (5'b10110 = 6.25 ns, 5'b00110 = 9.375 ns) and the rules "d[4] = 1 selects
// the rising-edge cell" and "a 1:1 pattern starting in slot k delays by
// k x 6.25 ns". The rising and falling edge times of every replica's clk40
// are recorded and must be t_L + m x 3125 + n x 25000 (rising) and 12500
// later (falling), for several BCs. The table is also compared with
// pad_tds_pkg::step_to_ctrl. A refresh with the same word at a later
// reference edge must leave the edge times unchanged (no glitch), and an
// SEU in one replica of the falling-edge cell must not disturb them.
module phase_shifter8_tmr_tb;
  timeunit 1ps;
  timeprecision 1ps;
  import pad_tds_pkg::*;

  int checks = 0, failures = 0;

  logic              clk = 1'b0;
  logic              sel_rise = 1'b0, sel_fall = 1'b0;
  phase_ctrl_t       dw;
  logic [2:0]        clk40;

  phase_shifter8_tmr dut (
    .clk160({3{clk}}), .sel_rise({3{sel_rise}}), .sel_fall({3{sel_fall}}),
    .d({3{dw}}), .clk40(clk40)
  );

  always #3125 clk = ~clk;

  localparam phase_ctrl_t TABLE [8] = '{
    5'b1_0011, 5'b0_0011, 5'b1_0110, 5'b0_0110,
    5'b1_1100, 5'b0_1100, 5'b1_1001, 5'b0_1001
  };

  // edge monitors
  longint rise_t [3][$];
  longint fall_t [3][$];
  for (genvar r = 0; r < 3; r++) begin : g_mon
    always @(posedge clk40[r]) rise_t[r].push_back($time);
    always @(negedge clk40[r]) fall_t[r].push_back($time);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Load word w at the next-but-one rising edge; returns t_L.
  task automatic load(input phase_ctrl_t w, output longint t_l);
    // inputs change 1 ps after a CLK160 rising edge, as a register's would
    @(posedge clk);
    #1;
    dw = w;
    sel_rise = 1'b1;
    @(posedge clk);
    t_l = $time;
    #1;
    sel_rise = 1'b0;
    sel_fall = 1'b1;
    @(posedge clk);
    #1;
    sel_fall = 1'b0;
  endtask

  // Check that between t0 and t1 every replica has exactly the edges of a
  // 25 ns clock rising at t_l + m*3125 (mod 25 ns).
  task automatic check_edges(input int m, input longint t_l, input longint t0,
                             input longint t1, input string what);
    for (int r = 0; r < 3; r++) begin
      int nr, nf;
      nr = 0; nf = 0;
      foreach (rise_t[r][i]) if (rise_t[r][i] >= t0 && rise_t[r][i] < t1) begin
        nr++;
        checks++;
        if ((rise_t[r][i] - t_l - m * 3125) % 25000 != 0) begin
          failures++;
          if (failures <= 20) $display("FAIL %s m=%0d r=%0d rise at %0d (t_l %0d)", what, m, r, rise_t[r][i], t_l);
        end
      end
      foreach (fall_t[r][i]) if (fall_t[r][i] >= t0 && fall_t[r][i] < t1) begin
        nf++;
        checks++;
        if ((fall_t[r][i] - t_l - m * 3125 - 12500) % 25000 != 0) begin
          failures++;
          if (failures <= 20) $display("FAIL %s m=%0d r=%0d fall at %0d (t_l %0d)", what, m, r, fall_t[r][i], t_l);
        end
      end
      checks++;
      if (nr != int'((t1 - t0) / 25000) || nf != nr) begin
        failures++;
        if (failures <= 20) $display("FAIL %s m=%0d r=%0d: %0d rising, %0d falling edges in %0d ps",
                 what, m, r, nr, nf, t1 - t0);
      end
    end
  endtask

  initial begin
    longint t_l, t_l2;
    dw = '0;
    repeat (4) @(posedge clk);

    for (int m = 0; m < 8; m++) begin
      checks++;
      if (step_to_ctrl(3'(m)) !== TABLE[m]) begin
        failures++;
        if (failures <= 20) $display("FAIL step_to_ctrl(%0d) = %b, expected %b", m, step_to_ctrl(3'(m)), TABLE[m]);
      end
    end

    for (int m = 0; m < 8; m++) begin
      load(TABLE[m], t_l);
      // let the new phase settle one BC, then observe 6 BCs
      repeat (4 * 7) @(posedge clk);
      check_edges(m, t_l, t_l + 25000, t_l + 7 * 25000, "phase");
      // refresh with the same word 8 BCs after t_l: no glitch
      while (($time - t_l) % 25000 != 25000 - 2 * 6250) @(posedge clk);
      load(TABLE[m], t_l2);
      checks++;
      if ((t_l2 - t_l) % 25000 != 0) begin failures++; if (failures <= 20) $display("FAIL tb load phase"); end
      // SEU in replica 1 of the falling-edge cell
      dut.u_fall.g_rep[1].q[1] = ~dut.u_fall.g_rep[1].q[1];
      repeat (4 * 6) @(posedge clk);
      check_edges(m, t_l, t_l + 25000, t_l + (($time - t_l) / 25000) * 25000,
                  "refresh/SEU");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
