// bt656_top_level: the thermal-camera capture path on the programmable logic.
//
// Chain, as in the paper's diagram of the decoder system:
//   THERMAL_DATA[7:0] --BT656_Decoder--> Data[15:0]/Valid/VBlank/HBlank
//     --BT656_to_AXIS--> 16-bit video stream
//     --Video_Scale (720x243 -> 640x480)--> 16-bit video stream
//     --Output FIFO (one frame)--> Thermal_dout[7:0], read by the processor.
// Three clocks: the camera's own clock runs the decoder and the write side of
// the stream bridge; the system clock (from the clock generator) runs the
// stream side, the scaler and the frame store's write side; the reader's clock
// runs the frame store's read side.  The paper's clock-conditioning and
// clock-generator blocks are clock buffers and a clock synthesizer; this module
// takes their output clocks as inputs (thermal_clk, sys_clk).  MCLR is taken as
// an active-high asynchronous reset and released per clock domain.
// Status outputs that the paper leaves unconnected are brought out for
// observation.
module bt656_top_level
  import fusion_pkg::*;
#(
  parameter int unsigned IN_W    = 720,
  parameter int unsigned IN_H    = 243,
  parameter int unsigned OUT_W   = 640,
  parameter int unsigned OUT_H   = 480,
  parameter int unsigned FIFO_AW = 10
) (
  input  logic        mclr,
  input  logic        thermal_clk,
  input  logic [7:0]  thermal_data,
  input  logic        sys_clk,
  // frame store read side
  input  logic        rdclk,
  input  logic        capture_en,
  input  logic        rden,
  output logic [7:0]  thermal_dout,
  output logic        frame_empty,
  // observation
  output logic        vid_error,
  output logic [7:0]  code_err,
  output logic [15:0] frames_stored,
  output logic [15:0] frames_dropped
);
  logic vid_rst_n, sys_rst_n;
  reset_sync u_rs_vid (.clk(thermal_clk), .rst_in(mclr), .rst_n(vid_rst_n));
  reset_sync u_rs_sys (.clk(sys_clk),     .rst_in(mclr), .rst_n(sys_rst_n));

  // decoder
  logic [15:0] dec_data;
  logic        dec_valid, dec_hblank, dec_vblank, dec_field;
  bt656_decoder u_decoder (
    .clk(thermal_clk), .rst_n(vid_rst_n), .din(thermal_data),
    .data(dec_data), .valid(dec_valid), .hblank(dec_hblank), .vblank(dec_vblank),
    .field(dec_field), .code_err
  );

  // to stream
  logic [15:0] a_data;
  logic        a_valid, a_ready, a_user, a_last;
  logic        st_active, st_hblank, st_vblank, st_empty;
  bt656_to_axis #(.FIFO_AW(FIFO_AW)) u_to_axis (
    .vid_clk(thermal_clk), .vid_rst_n, .vid_data(dec_data), .vid_valid(dec_valid),
    .vid_hblank(dec_hblank), .vid_vblank(dec_vblank),
    .aclk(sys_clk), .aresetn(sys_rst_n),
    .m_data(a_data), .m_valid(a_valid), .m_ready(a_ready), .m_user(a_user), .m_last(a_last),
    .active(st_active), .hblank(st_hblank), .vblank(st_vblank), .error(vid_error),
    .empty(st_empty)
  );

  // scaler
  logic [15:0] v_data;
  logic        v_valid, v_ready, v_user, v_last;
  video_scale #(.IN_W(IN_W), .IN_H(IN_H), .OUT_W(OUT_W), .OUT_H(OUT_H)) u_scale (
    .aclk(sys_clk), .aresetn(sys_rst_n),
    .s_data(a_data), .s_valid(a_valid), .s_ready(a_ready), .s_user(a_user), .s_last(a_last),
    .m_data(v_data), .m_valid(v_valid), .m_ready(v_ready), .m_user(v_user), .m_last(v_last)
  );

  // frame store
  output_fifo #(.FRAME_PIXELS(OUT_W * OUT_H)) u_fifo (
    .rst(mclr), .wrclk(sys_clk), .enable(capture_en),
    .s_data(v_data), .wren(v_valid), .s_ready(v_ready), .s_user(v_user), .s_last(v_last),
    .frames_stored, .frames_dropped,
    .rdclk, .rden, .dout(thermal_dout), .empty(frame_empty)
  );

  // the decoder's field bit and the bridge's status outputs are not used further
  logic unused;
  assign unused = ^{dec_field, st_active, st_hblank, st_vblank, st_empty};
endmodule
