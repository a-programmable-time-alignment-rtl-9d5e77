// pad_tds_align -- programmable per-channel time alignment for the pad
// trigger path: N_CH pad channels, each time-stamped with its own
// regenerated BC clock whose phase is programmable in eight 3.125 ns steps.
//
// Structure (all channels identical, built by duplicate instantiation):
//  * phase_load_sync finds the reference-edge phase of CLK160 and issues
//    the load strobes after reset, on cfg_load and at every BCR;
//  * per channel, phase_shifter8_tmr regenerates the channel's 40 MHz BC
//    clock from CLK160 with the phase set by phase_cfg[ch] (see
//    pad_tds_pkg::step_to_ctrl), and pad_channel captures the TOT leading
//    edges in that clock's BC windows;
//  * pad_frame_builder samples all hit bits once per BC and emits the
//    120-bit frame {header, BCID, hits} for the 4.8 Gbps serializer, which
//    is not part of this RTL.
//
// Triple redundancy: the phase shifters, the hit capture and the load
// synchronizer are built three times; replica r of every phase shifter
// takes its load strobes from synchronizer r, and the BC timing used by the
// frame builder is voted. The three clock trees of the chip are modelled by
// feeding the single clk160 input to all three replicas, and the control
// bits are fanned out to the three replicas (this design's choice: the
// configuration registers are outside this RTL). The frame builder is not
// triplicated here.
//
// Interface: clk160 is the 160 MHz global clock; ref40 the 40 MHz BC
// reference, rising together with a clk160 rising edge; bcr and cfg_load
// are one-BC pulses synchronous to ref40; rst is synchronous, active high.
// tot[ch] are the asynchronous TOT pulses. A pulse whose leading edge falls
// in [t_n + m x 3.125 ns, t_n+1 + m x 3.125 ns), t_n the reference edge of
// BC n and m the channel's step, is reported in the frame of BC n, which
// appears at the reference edge t_n+2.
module pad_tds_align
  import pad_tds_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic                        clk160,
  input  logic                        rst,
  input  logic                        ref40,
  input  logic                        bcr,
  input  logic                        cfg_load,
  input  phase_ctrl_t [NCH-1:0]       phase_cfg,  // d[4:0] per channel
  input  logic [NCH-1:0]              tot,
  output logic [HDR_W+BCID_W+NCH-1:0] frame,
  output logic                        frame_valid,
  output logic [BCID_W-1:0]           bcid,
  output logic                        aligned,
  output logic [NCH-1:0]              ch_clk40    // replica 0 channel clocks
);

  logic [2:0] sel_rise, sel_fall;          // per replica
  logic [2:0] bc_tick_r, bcr_tick_r, aligned_r;
  logic       bc_tick, bcr_tick;
  logic [NCH-1:0] hits;

  // One synchronizer per replica (per clock tree); the timing signals used
  // by the single frame builder are voted.
  for (genvar r = 0; r < 3; r++) begin : g_sync
    logic [1:0] slot;  // not used outside the synchronizer

    phase_load_sync u_sync (
      .clk160   (clk160),
      .rst      (rst),
      .ref40    (ref40),
      .bcr      (bcr),
      .cfg_load (cfg_load),
      .slot     (slot),
      .aligned  (aligned_r[r]),
      .bc_tick  (bc_tick_r[r]),
      .bcr_tick (bcr_tick_r[r]),
      .sel_rise (sel_rise[r]),
      .sel_fall (sel_fall[r])
    );
  end

  tmr_voter #(.W(3)) u_vote_sync (
    .i0 ({bc_tick_r[0], bcr_tick_r[0], aligned_r[0]}),
    .i1 ({bc_tick_r[1], bcr_tick_r[1], aligned_r[1]}),
    .i2 ({bc_tick_r[2], bcr_tick_r[2], aligned_r[2]}),
    .o  ({bc_tick, bcr_tick, aligned})
  );

  for (genvar ch = 0; ch < NCH; ch++) begin : g_ch
    logic [2:0] clk40;

    phase_shifter8_tmr u_ps (
      .clk160   ({3{clk160}}),
      .sel_rise (sel_rise),
      .sel_fall (sel_fall),
      .d        ({3{phase_cfg[ch]}}),
      .clk40    (clk40)
    );

    pad_channel u_pad (
      .clk40 (clk40),
      .tot   (tot[ch]),
      .hit   (hits[ch])
    );

    assign ch_clk40[ch] = clk40[0];
  end

  pad_frame_builder #(.NCH(NCH)) u_frame (
    .clk160      (clk160),
    .rst         (rst),
    .bc_tick     (bc_tick),
    .bcr_tick    (bcr_tick),
    .hits        (hits),
    .frame       (frame),
    .frame_valid (frame_valid),
    .bcid        (bcid)
  );

endmodule
