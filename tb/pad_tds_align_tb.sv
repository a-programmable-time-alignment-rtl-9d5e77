// pad_tds_align_tb -- end-to-end test of the pad time-alignment design at
// its full size (104 channels, all parameters at their defaults).
//
// Time unit 1 ps. CLK160 has a 6250 ps period and the 40 MHz reference
// rises with every fourth CLK160 rising edge. The testbench keeps its own
// BC count and a model of the chip's BCID (0 in the BC after a BCR, +1 per
// BC), and checks every output frame: header, BCID label (which must be
// the BCID of the BC two reference edges back, i.e. the fixed latency),
// and which channels fired.
//
// Part 1, step scan (the channel-by-channel delay evaluation with a test
// pulse that walks through the eight 3.125 ns slots of one BC): one
// machine cycle is LHC_BC BCs, closed by a BCR. In each cycle every channel
// gets one pulse in BC PULSE_BCID, with its leading edge in slot j
// (j x 3125 + 1562 ps after the reference edge); j walks 0..7 over eight
// cycles. In round R channel c is set to step (c + R) mod 8, so after eight
// rounds every channel has been scanned at every step. A pulse in slot j
// on a channel with step m must be reported in BCID PULSE_BCID if j >= m
// and in the BCID before it if j < m, so per round and channel the counts
// must be BCID_CNT0 = 8 - m and BCID_CNT1 = m (ratio (8-m)/m; 7 for m=1).
// The new steps are loaded with cfg_load in even rounds and only by the
// BCR refresh in odd rounds.
//
// Part 2, alignment: every channel gets its own trace delay, 0..20 ns,
// and a common "particle" time late in a BC. Without compensation the
// pulses split over two BCIDs; with the steps computed here from the
// trace delays all channels report the same BCID.
//
// All the time, the rising edges of every channel clock are checked to lie
// at step x 3125 ps after a reference edge, and the falling edges 12.5 ns
// later (except for two BCs around a
// change of step), so the BCR refreshes that reload unchanged bits are
// checked to be glitch-free. Upsets are injected: one flip-flop of one
// replica (must be invisible), and the same flip-flop in two replicas
// (must corrupt the clock until the next BCR refresh repairs it).
//
// Mechanism counters are printed; each must be non-zero.
module pad_tds_align_tb;
  timeunit 1ps;
  timeprecision 1ps;
  import pad_tds_pkg::*;

  localparam int LHC_BC     = BCR_PERIOD;  // BCs per machine cycle
  localparam int PULSE_BCID = 516;         // BC of the test pulse
  localparam int NC         = N_CH;

  int checks = 0, failures = 0;

  logic                   clk = 1'b0, rst = 1'b1, ref40 = 1'b0;
  logic                   bcr = 1'b0, cfg_load = 1'b0;
  phase_ctrl_t [NC-1:0]   phase_cfg;
  logic [NC-1:0]          tot;
  logic [HDR_W+BCID_W+NC-1:0] frame;
  logic                   frame_valid, aligned;
  logic [BCID_W-1:0]      bcid;
  logic [NC-1:0]          ch_clk40;

  pad_tds_align dut (
    .clk160(clk), .rst(rst), .ref40(ref40), .bcr(bcr), .cfg_load(cfg_load),
    .phase_cfg(phase_cfg), .tot(tot), .frame(frame), .frame_valid(frame_valid),
    .bcid(bcid), .aligned(aligned), .ch_clk40(ch_clk40)
  );

  always #3125 clk = ~clk;

  // ------------------------------------------------------------------
  // reference clock, BC count and BCID model
  longint t_ref0 = -1;
  int     bc = -1;
  int     bcid_model = 0;
  int     bcid_hist [int];
  event   bc_ev;

  initial begin
    #(3 * 6250 + 3125);      // a CLK160 rising edge
    forever begin
      ref40 = 1'b1;
      if (t_ref0 < 0) t_ref0 = $time;
      // bcr still holds its value in the BC that ends here
      bcid_model = bcr ? 0 : (bcid_model + 1) % 4096;
      bc++;
      bcid_hist[bc] = bcid_model;
      -> bc_ev;
      #12500;
      ref40 = 1'b0;
      #12500;
    end
  end

  task automatic wait_bc(input int n);
    repeat (n) @(bc_ev);
  endtask

  // one-BC pulses on bcr / cfg_load, starting at the next reference edge
  task automatic pulse_bcr();
    @(bc_ev); bcr = 1'b1;
    @(bc_ev); bcr = 1'b0;
  endtask
  task automatic pulse_load();
    @(bc_ev); cfg_load = 1'b1;
    @(bc_ev); cfg_load = 1'b0;
  endtask

  // ------------------------------------------------------------------
  // watchdog
  initial begin
    #(longint'(76 * LHC_BC + 2000) * 25000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // pulse generators: at fire_ev every channel fires after its own delay
  event   fire_ev;
  longint fire_dly [NC];

  for (genvar c = 0; c < NC; c++) begin : g_pulse
    initial begin
      tot[c] = 1'b0;
      forever begin
        @(fire_ev);
        #(fire_dly[c]);
        tot[c] = 1'b1;
        #8000;
        tot[c] = 1'b0;
      end
    end
  end

  // ------------------------------------------------------------------
  // channel-clock edge monitor
  int  exp_step [NC];
  bit  edge_chk [NC];
  int  edge_bad [NC];     // deviations while not checked (double upset)
  int  n_edges = 0;
  bit  during_refresh = 1'b0;
  int  n_refresh_edges = 0;

  for (genvar c = 0; c < NC; c++) begin : g_edge
    // rising edges at step x 3125 ps after a reference edge, falling edges
    // 12.5 ns later
    always @(ch_clk40[c]) begin
      if (t_ref0 >= 0) begin
        bit ok;
        ok = (($time - t_ref0) % 25000) ==
             (longint'(exp_step[c]) * 3125 + (ch_clk40[c] ? 0 : 12500)) % 25000;
        if (edge_chk[c]) begin
          checks++;
          n_edges++;
          if (during_refresh) n_refresh_edges++;
          if (!ok) begin
            failures++;
            if (failures <= 20) $display("FAIL ch %0d clock edge (%b) at %0d, step %0d", c, ch_clk40[c], $time,
                     exp_step[c]);
          end
        end else if (!ok) edge_bad[c]++;
      end
    end
  end

  // change the expected steps around a load that takes effect in BC
  // `bc_eff`; edge checks are off from now until two BCs after it
  task automatic set_steps(input int steps [NC]);
    for (int c = 0; c < NC; c++) begin
      phase_cfg[c] = step_to_ctrl(3'(steps[c]));
      edge_chk[c]  = 1'b0;
      exp_step[c]  = steps[c];
    end
  endtask
  task automatic enable_checks();
    for (int c = 0; c < NC; c++) edge_chk[c] = 1'b1;
  endtask

  // ------------------------------------------------------------------
  // frame monitor
  int  cnt0 [NC], cnt1 [NC], cnt_other = 0, n_frames = 0;
  int  label_k = PULSE_BCID;      // BCID of the pulse BC
  int  label_check_from = 1 << 30;  // BCIDs are defined after the first BCR

  always @(negedge clk) begin
    if (frame_valid && bc >= label_check_from) begin
      int label;
      n_frames++;
      label = int'(frame[NC +: BCID_W]);
      checks++;
      if (frame[NC + BCID_W +: HDR_W] !== FRAME_HEADER || label != bcid_hist[bc - 2]) begin
        failures++;
        if (failures <= 20) $display("FAIL frame in BC %0d: header %b label %0d expected %0d", bc,
                 frame[NC + BCID_W +: HDR_W], label, bcid_hist[bc - 2]);
      end
      for (int c = 0; c < NC; c++) if (frame[c]) begin
        if (label == label_k) cnt0[c]++;
        else if (label == (label_k + 4095) % 4096) cnt1[c]++;
        else cnt_other++;
      end
    end
  end

  // ------------------------------------------------------------------
  // mechanism counters
  int n_load_after_reset = 0, n_cfg_loads = 0, n_bcr_refresh = 0;
  int n_step_used [8];
  int n_prev_bc = 0, n_same_bc = 0;
  int n_seu_single = 0, n_seu_double_repaired = 0;
  int n_uncomp_split = 0, n_comp_aligned = 0;

  // fire all channels in BC `pulse_bc` (tb BC index) after `dly` ps each
  task automatic fire_at(input int pulse_bc);
    while (bc < pulse_bc) @(bc_ev);
    -> fire_ev;
  endtask

  initial begin
    int steps [NC];
    int cycle_start;           // tb BC index of BCID 0 of the current cycle
    int c_seu;

    for (int c = 0; c < NC; c++) begin
      steps[c] = 0; edge_bad[c] = 0; cnt0[c] = 0; cnt1[c] = 0;
    end
    set_steps(steps);
    repeat (6) @(posedge clk);
    #1 rst = 1'b0;
    wait (aligned);
    wait_bc(3);
    n_load_after_reset++;
    enable_checks();

    // first BCR: the BC after it is BCID 0
    pulse_bcr();
    cycle_start = bc;
    label_check_from = bc + 2;
    n_bcr_refresh++;

    // ---------------- part 1: step scan ----------------
    for (int r = 0; r < 8; r++) begin
      // new steps: with cfg_load in even rounds, by the BCR refresh that
      // closes the current cycle in odd rounds
      for (int c = 0; c < NC; c++) steps[c] = (c + r) % 8;
      set_steps(steps);
      if (r % 2 == 0) begin
        pulse_load();               // takes effect two BCs later
        n_cfg_loads++;
        wait_bc(3);
        enable_checks();
      end
      while (bc < cycle_start + LHC_BC - 2) @(bc_ev);
      pulse_bcr();
      cycle_start = bc;
      n_bcr_refresh++;
      wait_bc(3);
      enable_checks();
      for (int c = 0; c < NC; c++) begin cnt0[c] = 0; cnt1[c] = 0; end
      for (int j = 0; j < 8; j++) begin
        for (int c = 0; c < NC; c++) fire_dly[c] = longint'(j) * 3125 + 1562;
        fire_at(cycle_start + PULSE_BCID);
        // single upset in round 2, double upset in round 5
        if (r == 2 && j == 3) begin
          wait_bc(20);
          #1000;                    // away from the clock edges
          // cells in use: channel 3 has step 5 (falling-edge cell), channel
          // 4 step 6 (rising-edge cell)
          dut.g_ch[3].u_ps.u_fall.g_rep[0].q[2] = ~dut.g_ch[3].u_ps.u_fall.g_rep[0].q[2];
          dut.g_ch[4].u_ps.u_rise.g_rep[2].q[0] = ~dut.g_ch[4].u_ps.u_rise.g_rep[2].q[0];
          dut.g_ch[4].u_ps.u_rise.g_rep[0].q[3] = ~dut.g_ch[4].u_ps.u_rise.g_rep[0].q[3];
          dut.g_ch[5].u_pad.g_rep[1].samp = ~dut.g_ch[5].u_pad.g_rep[1].samp;
          n_seu_single++;
        end
        if (r == 5 && j == 4) begin
          wait_bc(20);
          #1000;
          c_seu = 9;
          edge_chk[c_seu] = 1'b0;
          edge_bad[c_seu] = 0;
          dut.g_ch[9].u_ps.u_rise.g_rep[0].q[1] = ~dut.g_ch[9].u_ps.u_rise.g_rep[0].q[1];
          dut.g_ch[9].u_ps.u_rise.g_rep[1].q[1] = ~dut.g_ch[9].u_ps.u_rise.g_rep[1].q[1];
          dut.g_ch[9].u_ps.u_fall.g_rep[0].q[1] = ~dut.g_ch[9].u_ps.u_fall.g_rep[0].q[1];
          dut.g_ch[9].u_ps.u_fall.g_rep[1].q[1] = ~dut.g_ch[9].u_ps.u_fall.g_rep[1].q[1];
        end
        // close the cycle with a BCR in its last BC
        while (bc < cycle_start + LHC_BC - 2) @(bc_ev);
        if (r == 5 && j == 4) begin
          checks++;
          if (edge_bad[c_seu] == 0) begin failures++; if (failures <= 20) $display("FAIL double upset not visible"); end
        end
        during_refresh = 1'b1;
        pulse_bcr();
        cycle_start = bc;
        n_bcr_refresh++;
        if (r == 5 && j == 4) begin
          wait_bc(3);
          edge_bad[c_seu] = 0;
          edge_chk[c_seu] = 1'b1;
          n_seu_double_repaired++;
        end
        wait_bc(4);
        during_refresh = 1'b0;
      end
      // per-channel counts of the round
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (cnt0[c] != 8 - steps[c] || cnt1[c] != steps[c]) begin
          failures++;
          if (failures <= 20) $display("FAIL round %0d ch %0d step %0d: BCID_CNT0 %0d BCID_CNT1 %0d",
                   r, c, steps[c], cnt0[c], cnt1[c]);
        end
        n_step_used[steps[c]]++;
        n_prev_bc += cnt1[c];
        n_same_bc += cnt0[c];
      end
      if (r == 1) begin
        $display("round 1: ch0 step %0d CNT0 %0d CNT1 %0d; ch4 step %0d CNT0 %0d CNT1 %0d",
                 steps[0], cnt0[0], cnt1[0], steps[4], cnt0[4], cnt1[4]);
      end
    end

    // ---------------- part 2: alignment of 104 channels ----------------
    begin
      longint trace [NC];
      for (int c = 0; c < NC; c++) begin
        trace[c] = longint'($urandom_range(0, 20000));
        // particle at 19 ns into the BC; channel c sees it trace[c] later
        fire_dly[c] = 19000 + trace[c];
      end
      // a) no compensation
      for (int c = 0; c < NC; c++) steps[c] = 0;
      set_steps(steps);
      pulse_load();
      wait_bc(3);
      enable_checks();
      for (int c = 0; c < NC; c++) begin cnt0[c] = 0; cnt1[c] = 0; end
      label_k = (PULSE_BCID + 1) % 4096;
      fire_at(cycle_start + PULSE_BCID);
      wait_bc(6);
      begin
        int in0, in1;
        in0 = 0; in1 = 0;
        for (int c = 0; c < NC; c++) begin
          // arrival a = 19000 + trace: BC PULSE_BCID if a < 25000, else +1
          checks++;
          if ((19000 + trace[c] < 25000) ? (cnt1[c] != 1) : (cnt0[c] != 1)) begin
            failures++; if (failures <= 20) $display("FAIL uncompensated ch %0d", c);
          end
          in0 += cnt0[c]; in1 += cnt1[c];
        end
        if (in0 > 0 && in1 > 0) n_uncomp_split++;
        $display("uncompensated: %0d channels in BCID %0d, %0d in BCID %0d",
                 in1, PULSE_BCID, in0, PULSE_BCID + 1);
      end
      // b) compensation: smallest step m with a < 25000 + m*3125 (own formula)
      for (int c = 0; c < NC; c++) begin
        longint a;
        a = 19000 + trace[c];
        steps[c] = 0;
        while (a >= 25000 + longint'(steps[c]) * 3125) steps[c]++;
      end
      set_steps(steps);
      pulse_load();
      wait_bc(3);
      enable_checks();
      for (int c = 0; c < NC; c++) begin cnt0[c] = 0; cnt1[c] = 0; end
      label_k = PULSE_BCID + 40;
      fire_at(cycle_start + PULSE_BCID + 40);
      wait_bc(6);
      begin
        int all;
        all = 0;
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (cnt0[c] != 1 || cnt1[c] != 0) begin
            failures++; if (failures <= 20) $display("FAIL compensated ch %0d step %0d", c, steps[c]);
          end
          all += cnt0[c];
        end
        if (all == NC) n_comp_aligned++;
        $display("compensated: %0d channels in BCID %0d", all, PULSE_BCID + 40);
      end
    end

    // ---------------- summary ----------------
    checks++;
    if (cnt_other != 0) begin
      failures++; if (failures <= 20) $display("FAIL %0d hits outside the expected BCIDs", cnt_other);
    end

    $display("frames %0d, clock edges checked %0d (%0d during BCR refreshes)",
             n_frames, n_edges, n_refresh_edges);
    $display("mechanisms: load_after_reset %0d cfg_load %0d bcr_refresh %0d", n_load_after_reset,
             n_cfg_loads, n_bcr_refresh);
    $display("mechanisms: hits_same_bc %0d hits_previous_bc %0d seu_single %0d seu_double_repaired %0d",
             n_same_bc, n_prev_bc, n_seu_single, n_seu_double_repaired);
    $display("mechanisms: uncompensated_split %0d compensated_aligned %0d glitch_free_refresh_edges %0d",
             n_uncomp_split, n_comp_aligned, n_refresh_edges);
    for (int m = 0; m < 8; m++) begin
      checks++;
      if (n_step_used[m] == 0) begin failures++; if (failures <= 20) $display("FAIL step %0d never used", m); end
    end
    foreach (n_step_used[m]) $display("step %0d used %0d channel-rounds", m, n_step_used[m]);
    checks++;
    if (n_load_after_reset == 0 || n_cfg_loads == 0 || n_bcr_refresh == 0 || n_same_bc == 0 ||
        n_prev_bc == 0 || n_seu_single == 0 || n_seu_double_repaired == 0 ||
        n_uncomp_split == 0 || n_comp_aligned == 0 || n_refresh_edges == 0) begin
      failures++;
      if (failures <= 20) $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
