// phase_load_sync_tb -- checks BC-phase finding and load-strobe timing.
//
// Time unit 1 ps; CLK160 period 6250 ps; ref40 rises on a CLK160 rising
// edge, 25 ns period. The testbench keeps its own BC number and the time
// of the last reference edge, and from them the expected slot of every
// CLK160 period. In the middle of every period after alignment it checks
// slot, bc_tick, bcr_tick, sel_rise and sel_fall against that model:
//  * exactly one load (sel_rise in slot 3, then sel_fall in slot 0) after
//    reset, and none without a request;
//  * a BCR or cfg_load in BC n gives sel_rise in slot 3 of BC n+1 (the
//    latency is checked in BCs), and bcr_tick in slot 3 of BC n;
//  * when the reference edge moves by one CLK160 period the slot counter
//    follows within two BCs.
module phase_load_sync_tb;
  timeunit 1ps;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  logic       clk = 1'b0, rst = 1'b1, ref40 = 1'b0, bcr = 1'b0, cfg_load = 1'b0;
  logic [1:0] slot;
  logic       aligned, bc_tick, bcr_tick, sel_rise, sel_fall;

  phase_load_sync dut (.clk160(clk), .rst(rst), .ref40(ref40), .bcr(bcr),
                       .cfg_load(cfg_load), .slot(slot), .aligned(aligned),
                       .bc_tick(bc_tick), .bcr_tick(bcr_tick),
                       .sel_rise(sel_rise), .sel_fall(sel_fall));

  always #3125 clk = ~clk;

  longint t_ref = 0;      // time of the last reference rising edge
  int     bc = -1;        // index of the current BC
  int     skip_ref = 0;   // delay the next reference edge by one CLK160 period
  int     check_from_bc = 1 << 30;

  // reference clock, first edge on the 3rd CLK160 rising edge
  initial begin
    #(2 * 6250 + 3125);
    forever begin
      ref40 = 1'b1; t_ref = $time; bc++;
      #12500;
      ref40 = 1'b0;
      #12500;
      if (skip_ref != 0) begin #6250; skip_ref = 0; end
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // request bookkeeping
  int req_bc [$];         // BCs that carried a request
  int bcr_bc [$];         // BCs that carried BCR
  int loads = 0, bcr_ticks = 0;
  logic prev_sel_rise = 1'b0;

  always @(negedge clk) begin
    int s_exp;
    s_exp = int'(($time - t_ref) / 6250);
    if (bc >= check_from_bc) begin
      checks++;
      if (!aligned || slot != 2'(s_exp)) begin
        failures++;
        if (failures <= 20) $display("FAIL bc %0d: slot %0d expected %0d aligned %b", bc, slot, s_exp, aligned);
      end
      checks++;
      if (bc_tick !== (s_exp == 3)) begin failures++; if (failures <= 20) $display("FAIL bc_tick bc %0d", bc); end
      checks++;
      if (sel_fall !== prev_sel_rise) begin failures++; if (failures <= 20) $display("FAIL sel_fall bc %0d", bc); end
      if (bcr_tick) begin
        bcr_ticks++;
        checks++;
        if (bcr_bc.size() == 0 || bcr_bc[0] != bc || s_exp != 3) begin
          failures++; if (failures <= 20) $display("FAIL bcr_tick in bc %0d slot %0d", bc, s_exp);
        end else void'(bcr_bc.pop_front());
      end
      if (sel_rise) begin
        loads++;
        checks++;
        if (s_exp != 3 || req_bc.size() == 0 || req_bc[0] + 1 != bc) begin
          failures++;
          if (failures <= 20) $display("FAIL sel_rise in bc %0d slot %0d (request bc %0d)", bc, s_exp,
                   (req_bc.size() != 0) ? req_bc[0] : -1);
        end
        if (req_bc.size() != 0) void'(req_bc.pop_front());
      end
    end
    prev_sel_rise = sel_rise;
  end

  // pulse bcr or cfg_load for one BC, starting at a reference edge
  task automatic request(input bit is_bcr);
    @(posedge ref40);
    if (is_bcr) begin bcr = 1'b1; bcr_bc.push_back(bc); end
    else        cfg_load = 1'b1;
    req_bc.push_back(bc);
    @(posedge ref40);
    bcr = 1'b0;
    cfg_load = 1'b0;
  endtask

  initial begin
    repeat (5) @(posedge clk);
    #1 rst = 1'b0;
    // the load after reset is issued in the BC in which alignment is found
    wait (aligned);
    req_bc.push_back(bc - 1);
    check_from_bc = bc;
    repeat (10) @(posedge ref40);
    checks++;
    if (loads != 1) begin failures++; if (failures <= 20) $display("FAIL %0d loads after reset", loads); end

    request(1'b1);
    repeat (5) @(posedge ref40);
    request(1'b0);
    repeat (3) @(posedge ref40);
    request(1'b1);
    request(1'b1);
    repeat (5) @(posedge ref40);
    checks++;
    if (loads != 5 || bcr_ticks != 3 || req_bc.size() != 0) begin
      failures++; if (failures <= 20) $display("FAIL loads %0d bcr_ticks %0d pending %0d", loads, bcr_ticks, req_bc.size());
    end

    // move the reference phase by one CLK160 period
    check_from_bc = 1 << 30;
    skip_ref = 1;
    repeat (3) @(posedge ref40);
    check_from_bc = bc;
    request(1'b1);
    repeat (20) @(posedge ref40);
    checks++;
    if (loads != 6) begin failures++; if (failures <= 20) $display("FAIL loads after phase move %0d", loads); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
