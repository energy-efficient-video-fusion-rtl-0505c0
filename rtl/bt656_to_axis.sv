// bt656_to_axis: turns decoded BT.656 video (camera clock) into a 16-bit
// AXI4-Stream video stream (system clock).
//
// On the camera side each valid sample is held for one sample so that the
// end of a line can be marked: when the next sample arrives the held one is
// queued with last=0; when horizontal blanking starts it is queued with
// last=1.  The first sample after vertical blanking carries user=1 (start of
// frame).  Samples cross to the system clock through a dual-clock queue of
// 2**FIFO_AW entries, so the stream side may stall (m_ready low) for up to a
// line without loss.  A sample that meets a full queue is lost and sets the
// sticky `error` flag.
//
// The paper's diagram names this block and its stream outputs (s_axi_data,
// valid, ready, user, last) and status outputs Active, HBlank, VBlank, HSync,
// VSync, Error, Empty, which it leaves unconnected.  This design provides
// active / hblank / vblank (camera clock), error (camera clock, sticky) and
// empty (system clock); BT.656 carries no separate sync pulses, so no
// HSync / VSync outputs are produced.
module bt656_to_axis
  import fusion_pkg::*;
#(
  parameter int unsigned FIFO_AW = 10
) (
  // camera side
  input  logic        vid_clk,
  input  logic        vid_rst_n,
  input  logic [15:0] vid_data,
  input  logic        vid_valid,
  input  logic        vid_hblank,
  input  logic        vid_vblank,
  // stream side
  input  logic        aclk,
  input  logic        aresetn,
  output logic [15:0] m_data,
  output logic        m_valid,
  input  logic        m_ready,
  output logic        m_user,
  output logic        m_last,
  // status
  output logic        active,
  output logic        hblank,
  output logic        vblank,
  output logic        error,
  output logic        empty
);
  vid_beat_t held, wr_beat, rd_beat;
  logic      held_ok, sof_pend, hblank_d, push, full;

  always_comb begin
    push    = 1'b0;
    wr_beat = held;
    if (held_ok && vid_valid) begin
      push         = 1'b1;
      wr_beat.last = 1'b0;
    end else if (held_ok && vid_hblank && !hblank_d) begin
      push         = 1'b1;
      wr_beat.last = 1'b1;
    end
  end

  always_ff @(posedge vid_clk or negedge vid_rst_n) begin
    if (!vid_rst_n) begin
      held     <= '0;
      held_ok  <= 1'b0;
      sof_pend <= 1'b1;
      hblank_d <= 1'b1;
      error    <= 1'b0;
    end else begin
      hblank_d <= vid_hblank;
      if (vid_vblank) sof_pend <= 1'b1;
      if (push) held_ok <= 1'b0;
      if (vid_valid) begin
        held.data <= vid_data;
        held.user <= sof_pend;
        held.last <= 1'b0;
        held_ok   <= 1'b1;
        sof_pend  <= 1'b0;
      end
      if (push && full) error <= 1'b1;
    end
  end

  async_fifo #(.W($bits(vid_beat_t)), .AW(FIFO_AW)) u_fifo (
    .wclk(vid_clk), .wrst_n(vid_rst_n), .wr_en(push), .wdata(wr_beat), .full,
    .rclk(aclk), .rrst_n(aresetn), .rd_en(m_ready), .rdata(rd_beat), .empty
  );

  assign m_valid = !empty;
  assign m_data  = rd_beat.data;
  assign m_user  = rd_beat.user;
  assign m_last  = rd_beat.last;

  assign active = !vid_hblank && !vid_vblank;
  assign hblank = vid_hblank;
  assign vblank = vid_vblank;
endmodule
