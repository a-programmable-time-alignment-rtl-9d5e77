// pad_frame_builder_tb -- checks frame contents, BCID counting and BCR.
//
// Time unit 1 ps, CLK160 period 6250 ps, full 104 channels. bc_tick is
// driven high in every fourth CLK160 period; the hit vector for each BC is
// random and is held from one BC boundary to the next, the way the channel
// hit bits are. BCR is given every 37 BCs for the first 200 BCs and once more
// at BC 300; then none, so the BCID passes 4095 and wraps. The testbench keeps
// its own BCID: 0 in the BC after a BCR, +1 per BC, modulo 4096, and checks
// each frame (one per BC, frame_valid for one CLK160 period) against
// {4'b1010, BCID of the BC before the current one, hits}: at the tick that
// ends BC b the channel hit bits hold the window of BC b-1. 5000 BCs.
module pad_frame_builder_tb;
  timeunit 1ps;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  localparam int NB = 5000;

  logic           clk = 1'b0, rst = 1'b1;
  logic           bc_tick = 1'b0, bcr_tick = 1'b0;
  logic [103:0]   hits = '0;
  logic [119:0]   frame;
  logic           frame_valid;
  logic [11:0]    bcid;

  pad_frame_builder dut (.clk160(clk), .rst(rst), .bc_tick(bc_tick), .bcr_tick(bcr_tick),
                         .hits(hits), .frame(frame), .frame_valid(frame_valid), .bcid(bcid));

  always #3125 clk = ~clk;

  initial begin
    repeat (4 * NB + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int bcid_of [NB + 1];   // model BCID of each BC

  initial begin
    logic [103:0] h_tick;
    int           nframes;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;            // the BC starting at the next edge is BC 0
    bcid_of[0] = 0;
    nframes    = 0;
    @(posedge clk); #1;       // first edge of BC 0
    for (int b = 0; b < NB; b++) begin
      bit is_bcr;
      is_bcr = (b < 200 && b % 37 == 36) || (b == 300);
      // slots 1 and 2: no tick, no frame
      for (int s = 1; s < 3; s++) begin
        @(posedge clk); #1;
        checks++;
        if (frame_valid !== 1'b0) begin failures++; if (failures <= 20) $display("FAIL frame_valid BC %0d slot %0d", b, s); end
        if (s == 1) hits = {$urandom(), $urandom(), $urandom(), 8'($urandom())};
      end
      // slot 3: tick
      @(posedge clk); #1;
      bc_tick  = 1'b1;
      bcr_tick = is_bcr;
      h_tick   = hits;
      // first edge of BC b+1: frame of the hits sampled now
      @(posedge clk); #1;
      bc_tick = 1'b0; bcr_tick = 1'b0;
      bcid_of[b + 1] = is_bcr ? 0 : (bcid_of[b] + 1) % 4096;
      checks++;
      if (frame_valid !== 1'b1) begin failures++; if (failures <= 20) $display("FAIL no frame_valid BC %0d", b); end
      checks++;
      if (frame !== {4'b1010, 12'((b == 0) ? 0 : bcid_of[b - 1]), h_tick}) begin
        failures++;
        if (failures <= 20) $display("FAIL BC %0d frame %h", b, frame);
      end
      checks++;
      if (bcid !== 12'(bcid_of[b + 1])) begin
        failures++; if (failures <= 20) $display("FAIL BC %0d bcid %0d expected %0d", b + 1, bcid, bcid_of[b + 1]);
      end
      if (frame_valid) nframes++;
    end
    checks++;
    if (nframes != NB) begin failures++; if (failures <= 20) $display("FAIL %0d frames", nframes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
