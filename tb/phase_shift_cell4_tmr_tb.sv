// phase_shift_cell4_tmr_tb -- checks the triple-redundant 4-step cell.
//
// Time unit is 1 ps; CLK160 has a 6250 ps period. For each of the 16
// patterns the cell is loaded with a one-cycle SEL and the output of every
// replica is compared, in the middle of each of the next 12 clock periods,
// with d[n mod 4] (n = periods since the load). Then the redundancy is
// exercised:
//  * single upset: one flip-flop of one replica is inverted; the outputs
//    of all replicas must stay correct (the voter repairs it);
//  * SEL upset: one replica alone sees SEL with wrong control bits; all
//    outputs must keep the old pattern;
//  * double upset: the same flip-flop is inverted in two replicas; the
//    pattern is then wrong (counted as a check that the error is visible)
//    until the next SEL load restores it.
// Also checks the two examples of the design description: 4'b0110 gives a
// 1:1 clock that rises 6.25 ns after the load edge, 4'b1101 a 3:1 clock.
module phase_shift_cell4_tmr_tb;
  timeunit 1ps;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  logic            clk = 1'b0;
  logic [2:0]      sel;
  logic [2:0][3:0] d;
  logic [2:0]      clk40;

  phase_shift_cell4_tmr dut (.clk({3{clk}}), .sel(sel), .d(d), .clk40(clk40));

  always #3125 clk = ~clk;

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Load pattern p into all replicas; returns after the loading edge.
  task automatic load(input logic [3:0] p);
    @(negedge clk);
    sel = 3'b111;
    d   = {3{p}};
    @(posedge clk);
    @(negedge clk);   // middle of period 0 after the load
    sel = 3'b000;
  endtask

  // Check n periods of output, starting in the middle of period `first`.
  task automatic expect_pattern(input logic [3:0] p, input int first, input int n,
                                input string what);
    for (int k = first; k < first + n; k++) begin
      for (int r = 0; r < 3; r++) begin
        checks++;
        if (clk40[r] !== p[k % 4]) begin
          failures++;
          if (failures <= 20) $display("FAIL %s p=%b period %0d replica %0d: %b", what, p, k, r, clk40[r]);
        end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    sel = '0;
    d   = '0;
    repeat (3) @(posedge clk);

    // all 16 patterns
    for (int v = 0; v < 16; v++) begin
      load(4'(v));
      expect_pattern(4'(v), 0, 12, "pattern");
    end

    // examples: 0110 rises at the start of period 1 (6.25 ns), 1:1;
    // 1101 is high 3 of 4 periods
    begin
      int hi;
      load(4'b0110);
      checks++;
      if (clk40[0] !== 1'b0) begin failures++; if (failures <= 20) $display("FAIL 0110 period 0"); end
      @(negedge clk);
      checks++;
      if (clk40[0] !== 1'b1) begin failures++; if (failures <= 20) $display("FAIL 0110 period 1"); end
      load(4'b1101);
      hi = 0;
      for (int k = 0; k < 4; k++) begin hi += int'(clk40[0]); @(negedge clk); end
      checks++;
      if (hi != 3) begin failures++; if (failures <= 20) $display("FAIL 1101 high count %0d", hi); end
    end

    // single upset in replica 1, stage 2 (a non-output stage)
    load(4'b0011);
    expect_pattern(4'b0011, 0, 2, "before SEU");
    dut.g_rep[1].q[2] = ~dut.g_rep[1].q[2];
    expect_pattern(4'b0011, 2, 12, "single SEU");
    // single upset of the output flip-flop of replica 2: the other two
    // replicas' outputs must be unaffected and replica 2 repaired next edge
    dut.g_rep[2].q[0] = ~dut.g_rep[2].q[0];
    @(negedge clk);
    for (int k = 0; k < 8; k++) begin
      for (int r = 0; r < 3; r++) begin
        checks++;
        if (clk40[r] !== clk40[0]) begin failures++; if (failures <= 20) $display("FAIL output SEU r%0d", r); end
      end
      @(negedge clk);
    end

    // SEL upset: replica 0 alone loads 1100
    load(4'b0011);
    sel = 3'b001;
    d[0] = 4'b1100;
    @(posedge clk);
    @(negedge clk);
    sel = '0;
    d = {3{4'b0011}};
    expect_pattern(4'b0011, 1, 8, "SEL SEU");

    // double upset of the same stage: wrong until reload
    load(4'b0011);
    dut.g_rep[0].q[3] = ~dut.g_rep[0].q[3];
    dut.g_rep[1].q[3] = ~dut.g_rep[1].q[3];
    begin
      int wrong;
      logic [3:0] pat0011;
      pat0011 = 4'b0011;
      wrong = 0;
      for (int k = 1; k < 9; k++) begin
        if (clk40[0] !== pat0011[k % 4]) wrong++;
        @(negedge clk);
      end
      checks++;
      if (wrong == 0) begin failures++; if (failures <= 20) $display("FAIL double upset not visible"); end
    end
    load(4'b0011);
    expect_pattern(4'b0011, 0, 12, "after refresh");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
