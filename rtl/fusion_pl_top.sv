// fusion_pl_top: the programmable-logic half of the visible/infrared video
// fusion system.  It holds the two blocks the paper places on the FPGA side:
//   * the wavelet hardware (wav_engine): a row-filtering accelerator for the
//     forward and inverse dual-tree complex wavelet transform, commanded over
//     AXI4-Lite and moving data over an AXI4 master meant for the processor's
//     cache-coherent accelerator port;
//   * the camera decode system (camera_decode_wrapper): BT.656 decoding,
//     scaling and frame buffering of the thermal camera, read by the processor
//     over AXI4-Lite.
// The processor (fusion rule, tree traversal, the web camera, Linux driver)
// and the clock generator are outside; their connections are the ports here.
// Everything on the bus side runs on `aclk` (100 MHz in the paper).
module fusion_pl_top
  import fusion_pkg::*;
#(
  parameter int unsigned MAX_WIDTH = 2048,
  parameter int unsigned IN_W      = 720,
  parameter int unsigned IN_H      = 243,
  parameter int unsigned OUT_W     = 640,
  parameter int unsigned OUT_H     = 480
) (
  input  logic        aclk,
  input  logic        aresetn,
  // wavelet engine control (AXI4-Lite slave)
  input  logic [11:0] wav_awaddr,
  input  logic        wav_awvalid,
  output logic        wav_awready,
  input  logic [31:0] wav_wdata,
  input  logic [3:0]  wav_wstrb,
  input  logic        wav_wvalid,
  output logic        wav_wready,
  output logic [1:0]  wav_bresp,
  output logic        wav_bvalid,
  input  logic        wav_bready,
  input  logic [11:0] wav_araddr,
  input  logic        wav_arvalid,
  output logic        wav_arready,
  output logic [31:0] wav_rdata,
  output logic [1:0]  wav_rresp,
  output logic        wav_rvalid,
  input  logic        wav_rready,
  // wavelet engine memory port (AXI4 master)
  output logic [31:0] m_araddr,
  output logic [7:0]  m_arlen,
  output logic [2:0]  m_arsize,
  output logic [1:0]  m_arburst,
  output logic [3:0]  m_arcache,
  output logic [2:0]  m_arprot,
  output logic        m_arvalid,
  input  logic        m_arready,
  input  logic [31:0] m_rdata,
  input  logic [1:0]  m_rresp,
  input  logic        m_rlast,
  input  logic        m_rvalid,
  output logic        m_rready,
  output logic [31:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic [3:0]  m_awcache,
  output logic [2:0]  m_awprot,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wlast,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready,
  output logic        wav_done,
  // camera wrapper (AXI4-Lite slave)
  input  logic [3:0]  cam_awaddr,
  input  logic        cam_awvalid,
  output logic        cam_awready,
  input  logic [31:0] cam_wdata,
  input  logic [3:0]  cam_wstrb,
  input  logic        cam_wvalid,
  output logic        cam_wready,
  output logic [1:0]  cam_bresp,
  output logic        cam_bvalid,
  input  logic        cam_bready,
  input  logic [3:0]  cam_araddr,
  input  logic        cam_arvalid,
  output logic        cam_arready,
  output logic [31:0] cam_rdata,
  output logic [1:0]  cam_rresp,
  output logic        cam_rvalid,
  input  logic        cam_rready,
  // thermal camera (through the FMC connector) and clocks
  input  logic        mclr,
  input  logic        thermal_clk,
  input  logic [7:0]  thermal_data,
  input  logic        sys_clk,        // from the clock generator
  // observation
  output logic        frame_ready,
  output logic        vid_error,
  output logic [7:0]  code_err,
  output logic [15:0] frames_stored,
  output logic [15:0] frames_dropped
);
  wav_engine #(.MAX_WIDTH(MAX_WIDTH)) u_wavelet (
    .clk(aclk), .rst_n(aresetn),
    .s_awaddr(wav_awaddr), .s_awvalid(wav_awvalid), .s_awready(wav_awready),
    .s_wdata(wav_wdata), .s_wstrb(wav_wstrb), .s_wvalid(wav_wvalid), .s_wready(wav_wready),
    .s_bresp(wav_bresp), .s_bvalid(wav_bvalid), .s_bready(wav_bready),
    .s_araddr(wav_araddr), .s_arvalid(wav_arvalid), .s_arready(wav_arready),
    .s_rdata(wav_rdata), .s_rresp(wav_rresp), .s_rvalid(wav_rvalid), .s_rready(wav_rready),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arcache, .m_arprot,
    .m_arvalid, .m_arready, .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awcache, .m_awprot,
    .m_awvalid, .m_awready, .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready,
    .irq_done(wav_done)
  );

  camera_decode_wrapper #(.IN_W(IN_W), .IN_H(IN_H), .OUT_W(OUT_W), .OUT_H(OUT_H)) u_camera (
    .mclr, .thermal_clk, .thermal_data, .sys_clk,
    .s_axi_aclk(aclk), .s_axi_aresetn(aresetn),
    .s_awaddr(cam_awaddr), .s_awvalid(cam_awvalid), .s_awready(cam_awready),
    .s_wdata(cam_wdata), .s_wstrb(cam_wstrb), .s_wvalid(cam_wvalid), .s_wready(cam_wready),
    .s_bresp(cam_bresp), .s_bvalid(cam_bvalid), .s_bready(cam_bready),
    .s_araddr(cam_araddr), .s_arvalid(cam_arvalid), .s_arready(cam_arready),
    .s_rdata(cam_rdata), .s_rresp(cam_rresp), .s_rvalid(cam_rvalid), .s_rready(cam_rready),
    .frame_ready, .vid_error, .code_err, .frames_stored, .frames_dropped
  );
endmodule
