// phase_load_sync -- BC phase finder and load-strobe generator for the
// channel phase shifters.
//
// The phase shifters must load their control bits at a fixed time with
// respect to the rising edge of the 40 MHz BC reference clock, both at
// initial configuration and at every bunch-crossing reset (BCR), when the
// bits are refreshed. This block provides that synchronization:
//
//  * ref40, bcr and cfg_load are sampled on the falling edge of CLK160,
//    half a period away from the CLK160 rising edges that are aligned with
//    the reference edges, then re-registered on the rising edge.
//  * A 2-bit slot counter numbers the four CLK160 periods of a BC (slot 0
//    starts at the reference rising edge). It is realigned whenever a
//    reference rising edge is seen; `aligned` goes high after the first one.
//  * bc_tick is high in slot 3: the CLK160 rising edge that ends it starts
//    a new BC. bcr_tick is bc_tick qualified by a BCR seen in that BC.
//  * A load request (after reset, on cfg_load or on BCR) is kept pending
//    until the next slot 3 and then issued as sel_rise (high during slot 3,
//    so the rising-edge cells load at the reference edge) followed by
//    sel_fall (high during slot 0, so the falling-edge cells load at the
//    CLK160 falling edge 3.125 ns later).
//
// Reloading unchanged control bits at this fixed phase writes exactly the
// pattern the rings already hold, so the refresh produces no glitch on the
// channel clocks; it only repairs upset flip-flops.
//
// The need for a fixed-phase, glitch-free load and the refresh at every BCR
// follow the design description; the sampling scheme, counter, pending
// flag and the one-BC-wide pulse convention for bcr and cfg_load are this
// design's own. The top level instantiates one copy per TMR replica.
//
// Interface timing: bcr and cfg_load are one BC wide, synchronous to ref40.
// A request seen at the end of BC n gives sel_rise in slot 3 of BC n+1; the
// new phase is in effect from the start of BC n+2. rst is synchronous to
// CLK160 and active high.
module phase_load_sync (
  input  logic       clk160,
  input  logic       rst,
  input  logic       ref40,     // 40 MHz BC reference clock
  input  logic       bcr,       // bunch-crossing reset, one BC wide
  input  logic       cfg_load,  // control bits were (re)written, one BC wide
  output logic [1:0] slot,      // CLK160 period within the BC, 0..3
  output logic       aligned,   // slot counter locked to ref40
  output logic       bc_tick,   // last CLK160 period of a BC
  output logic       bcr_tick,  // bc_tick of the BC that carried BCR
  output logic       sel_rise,  // load strobe for rising-edge cells
  output logic       sel_fall   // load strobe for falling-edge cells
);

  logic ref_n, bcr_n, load_n;  // falling-edge samples
  logic ref_d;                 // previous ref_n, rising-edge domain
  logic pending;

  always_ff @(negedge clk160) begin
    ref_n  <= ref40;
    bcr_n  <= bcr;
    load_n <= cfg_load;
  end

  always_comb begin
    bc_tick  = aligned && (slot == 2'd3);
    bcr_tick = bc_tick && bcr_n;
  end

  always_ff @(posedge clk160) begin
    if (rst) begin
      ref_d    <= 1'b0;
      slot     <= 2'd0;
      aligned  <= 1'b0;
      pending  <= 1'b1;          // load once after reset
      sel_rise <= 1'b0;
      sel_fall <= 1'b0;
    end else begin
      ref_d <= ref_n;
      // ref_n rose in the middle of slot 0, so this edge starts slot 1.
      if (ref_n && !ref_d) begin
        slot    <= 2'd1;
        aligned <= 1'b1;
      end else begin
        slot <= slot + 2'd1;
      end

      sel_rise <= aligned && pending && (slot == 2'd2);
      sel_fall <= sel_rise;

      if (aligned && pending && (slot == 2'd2))
        pending <= 1'b0;
      else if (bc_tick && (bcr_n || load_n))
        pending <= 1'b1;
    end
  end

endmodule
