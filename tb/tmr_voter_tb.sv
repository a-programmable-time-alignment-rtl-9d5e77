// tmr_voter_tb -- exhaustive check of the 2-out-of-3 voter.
//
// For a 4-bit voter every combination of the three inputs (4096) is
// applied; the expected bit is computed by counting the ones among the
// three input bits. A 1-bit instance is checked on all 8 combinations too.
module tmr_voter_tb;
  timeunit 1ps;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  logic [3:0] a, b, c, o4;
  logic       x, y, z, o1;

  tmr_voter #(.W(4)) dut4 (.i0(a), .i1(b), .i2(c), .o(o4));
  tmr_voter          dut1 (.i0(x), .i1(y), .i2(z), .o(o1));

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4096; v++) begin
      {a, b, c} = 12'(v);
      #1;
      for (int i = 0; i < 4; i++) begin
        int ones;
        ones = int'(a[i]) + int'(b[i]) + int'(c[i]);
        checks++;
        if (o4[i] !== (ones >= 2)) begin
          failures++;
          if (failures <= 20) $display("FAIL W=4 a=%b b=%b c=%b bit %0d o=%b", a, b, c, i, o4);
        end
      end
    end
    for (int v = 0; v < 8; v++) begin
      {x, y, z} = 3'(v);
      #1;
      checks++;
      if (o1 !== ((int'(x) + int'(y) + int'(z)) >= 2)) begin
        failures++;
        if (failures <= 20) $display("FAIL W=1 %b%b%b o=%b", x, y, z, o1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
