// video_scale: nearest-neighbour resampler of an AXI4-Stream video stream,
// by default from the thermal camera's 720x243 field to 640x480 (the ratio
// printed on the paper's diagram, "720x243 to 640x480, 60Hz").
//
// Horizontal (shrink, OUT_W <= IN_W): a DDA adds OUT_W per input sample and
// keeps the sample whenever the sum passes IN_W, so exactly OUT_W of every IN_W
// samples of a line are passed on.  Vertical (stretch, IN_H <= OUT_H <=
// 2*IN_H): a second DDA adds OUT_H per input line; a line whose sum passes
// 2*IN_H is sent twice, the second time from a one-line buffer while the input
// is held off (s_ready low).  A frame of IN_H lines thus becomes OUT_H lines.
// user=1 at the start of the input frame resets both DDAs and is carried to
// the first output sample; last=1 marks sample OUT_W-1 of each output line.
// Input lines are taken to be IN_W samples long; s_last also ends a line.
//
// The paper gives the block's name, its stream ports and the two frame sizes;
// the resampling method is this design's choice.  Samples are moved as opaque
// 16-bit words (the luma byte is what the capture path keeps).
// Timing: a passed sample goes straight through (combinational valid/ready);
// a repeated line takes OUT_W cycles with m_ready high.
module video_scale
  import fusion_pkg::*;
#(
  parameter int unsigned IN_W  = 720,
  parameter int unsigned IN_H  = 243,
  parameter int unsigned OUT_W = 640,
  parameter int unsigned OUT_H = 480
) (
  input  logic        aclk,
  input  logic        aresetn,
  input  logic [15:0] s_data,
  input  logic        s_valid,
  output logic        s_ready,
  input  logic        s_user,
  input  logic        s_last,
  output logic [15:0] m_data,
  output logic        m_valid,
  input  logic        m_ready,
  output logic        m_user,
  output logic        m_last
);
  localparam int unsigned XW = $clog2(OUT_W + 1);
  localparam int unsigned HW = $clog2(IN_W + OUT_W + 1);
  localparam int unsigned VW = $clog2(2*IN_H + OUT_H + 1);

  logic [15:0]   line [OUT_W];
  logic [HW-1:0] hacc, hacc_in;
  logic [VW-1:0] vacc, vacc_in;
  logic [XW-1:0] ox;            // output sample index in the line
  logic          replay, sof_pend;

  // DDA state as seen by the current input sample (reset at start of frame)
  assign hacc_in = s_user ? '0 : hacc;
  assign vacc_in = s_user ? '0 : vacc;

  logic keep, in_fire, out_fire, line_end;
  logic [HW-1:0] hsum;
  logic [VW-1:0] vsum;
  assign hsum     = hacc_in + HW'(OUT_W);
  assign keep     = (hsum >= HW'(IN_W));
  assign vsum     = vacc_in + VW'(OUT_H);

  always_comb begin
    if (replay) begin
      m_valid = 1'b1;
      m_data  = line[ox];
      m_user  = 1'b0;
      s_ready = 1'b0;
    end else begin
      m_valid = s_valid && keep;
      m_data  = s_data;
      m_user  = sof_pend || s_user;
      s_ready = keep ? m_ready : 1'b1;
    end
    m_last = (ox == XW'(OUT_W - 1));
  end

  assign in_fire  = !replay && s_valid && s_ready;
  assign out_fire = m_valid && m_ready;
  assign line_end = in_fire && (s_last || (keep && ox == XW'(OUT_W - 1)));

  always_ff @(posedge aclk) begin
    if (in_fire && keep) line[ox] <= s_data;
  end

  always_ff @(posedge aclk or negedge aresetn) begin
    if (!aresetn) begin
      hacc     <= '0;
      vacc     <= '0;
      ox       <= '0;
      replay   <= 1'b0;
      sof_pend <= 1'b0;
    end else begin
      if (in_fire) begin
        if (s_user) sof_pend <= 1'b1;
        if (keep) sof_pend <= 1'b0;
        hacc <= keep ? hsum - HW'(IN_W) : hsum;
        if (keep) ox <= ox + 1'b1;
        if (s_user) vacc <= vacc_in;
        if (line_end) begin
          hacc <= '0;
          ox   <= '0;
          // this line is sent twice if the vertical sum passes 2*IN_H
          if (vsum >= VW'(2*IN_H)) begin
            vacc   <= vsum - VW'(2*IN_H);
            replay <= 1'b1;
          end else begin
            vacc   <= vsum - VW'(IN_H);
          end
        end
      end else if (replay && out_fire) begin
        ox <= ox + 1'b1;
        if (ox == XW'(OUT_W - 1)) begin
          ox     <= '0;
          replay <= 1'b0;
        end
      end
    end
  end

  initial begin
    assert (OUT_W <= IN_W) else $error("video_scale: horizontal factor must be <= 1");
    assert (OUT_H >= IN_H && OUT_H <= 2*IN_H) else $error("video_scale: vertical factor must be in [1,2]");
  end
endmodule
