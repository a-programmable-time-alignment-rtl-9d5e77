// pad_frame_builder -- gathers the hit bits of all pad channels once per BC
// and forms the per-BC output frame.
//
// Every channel's hit bit is stable for one channel BC after that
// channel's clock edge. All channel clock edges of BC window n lie in
// [t_n+1, t_n+1 + 21.875 ns], so every hit bit still shows window n at the
// reference edge t_n+2, where this block samples them (on the CLK160 edge
// that ends bc_tick). The BCID counter counts BCs, is cleared by BCR (the
// BC after a BCR is BCID 0) and wraps at 2^12. The frame of window n is
// labelled with the BCID of BC n.
//
// Frame (FRAME_W = 120 bits, sent every 25 ns at 4.8 Gbps by a serializer
// outside this block): {header[3:0], bcid[11:0], hits[N_CH-1:0]}. The
// 120-bit width, the 12-bit BCID and the 104 hit bits come from the design
// description; their order, the header and the BCID reset value are this
// design's choice.
//
// Timing: frame and bcid_out change on the CLK160 edge that starts a BC;
// frame_valid is high for the following CLK160 period. Latency from the end
// of a channel window to the frame is (8 - m) x 3.125 ns for a channel at
// step m; the frame of BC n always appears at the reference edge t_n+2.
module pad_frame_builder
  import pad_tds_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic                            clk160,
  input  logic                            rst,
  input  logic                            bc_tick,   // slot 3 of a BC
  input  logic                            bcr_tick,  // BCR in this BC
  input  logic [NCH-1:0]                  hits,      // channel hit bits
  output logic [HDR_W+BCID_W+NCH-1:0]     frame,
  output logic                            frame_valid,
  output logic [BCID_W-1:0]               bcid       // BCID of the current BC
);

  logic [BCID_W-1:0] bcid_prev;

  always_ff @(posedge clk160) begin
    if (rst) begin
      bcid        <= '0;
      bcid_prev   <= '0;
      frame       <= '0;
      frame_valid <= 1'b0;
    end else begin
      frame_valid <= bc_tick;
      if (bc_tick) begin
        bcid      <= bcr_tick ? '0 : bcid + 1'b1;
        bcid_prev <= bcid;
        frame     <= {FRAME_HEADER, bcid_prev, hits};
      end
    end
  end

endmodule
