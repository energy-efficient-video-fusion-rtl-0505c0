// camera_decode_wrapper: the "Camera Decode System Wrapper" of the paper's
// programmable-logic diagram.  It joins the thermal-camera capture path
// (bt656_top_level) to the processor's AXI4-Lite bus: axi_ipif turns each bus
// access into a register-interface access, axi_control_logic answers it and
// pops the frame store, and slave_register holds the registers.  The processor
// enables capture (CTRL[0]), polls STATUS[0] until a frame is ready, then reads
// DATA once per pixel, OUT_W*OUT_H times per frame, in raster order.  The
// frame store takes a new frame only after the last pixel of the previous one
// has been read.  The bus side, the read side of the frame store and the
// registers run on s_axi_aclk.
module camera_decode_wrapper
  import fusion_pkg::*;
#(
  parameter int unsigned IN_W    = 720,
  parameter int unsigned IN_H    = 243,
  parameter int unsigned OUT_W   = 640,
  parameter int unsigned OUT_H   = 480,
  parameter int unsigned FIFO_AW = 10
) (
  // camera and clocks
  input  logic        mclr,
  input  logic        thermal_clk,
  input  logic [7:0]  thermal_data,
  input  logic        sys_clk,
  // AXI4-Lite slave
  input  logic        s_axi_aclk,
  input  logic        s_axi_aresetn,
  input  logic [3:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [3:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // observation
  output logic        frame_ready,
  output logic        vid_error,
  output logic [7:0]  code_err,
  output logic [15:0] frames_stored,
  output logic [15:0] frames_dropped
);
  logic        cs, rnw, rdack, wrack, ip_err;
  logic [3:0]  rdce, wrce, be;
  logic [31:0] b2ip_data, ip2b_data;
  logic        rden, frame_empty, wr_ctrl, capture, capture_en;
  logic [7:0]  pix;

  axi_ipif #(.NUM_REGS(4)) u_ipif (
    .clk(s_axi_aclk), .rst_n(s_axi_aresetn),
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .bus2ip_cs(cs), .bus2ip_rdce(rdce), .bus2ip_wrce(wrce), .bus2ip_data(b2ip_data),
    .bus2ip_be(be), .bus2ip_rnw(rnw), .ip2bus_data(ip2b_data),
    .ip2bus_rdack(rdack), .ip2bus_wrack(wrack), .ip2bus_error(ip_err)
  );

  axi_control_logic u_ctrl (
    .clk(s_axi_aclk), .rst_n(s_axi_aresetn),
    .bus2ip_cs(cs), .bus2ip_rdce(rdce), .bus2ip_wrce(wrce),
    .ip2bus_rdack(rdack), .ip2bus_wrack(wrack), .ip2bus_error(ip_err),
    .rden, .frame_empty, .wr_ctrl, .capture
  );

  slave_register u_regs (
    .clk(s_axi_aclk), .rst_n(s_axi_aresetn),
    .wr_ctrl, .wdata(b2ip_data), .be, .capture, .din(pix), .frame_empty,
    .rd_sel(rdce), .rd_data(ip2b_data), .capture_en
  );

  bt656_top_level #(.IN_W(IN_W), .IN_H(IN_H), .OUT_W(OUT_W), .OUT_H(OUT_H),
                    .FIFO_AW(FIFO_AW)) u_bt656 (
    .mclr, .thermal_clk, .thermal_data, .sys_clk,
    .rdclk(s_axi_aclk), .capture_en, .rden, .thermal_dout(pix), .frame_empty,
    .vid_error, .code_err, .frames_stored, .frames_dropped
  );

  assign frame_ready = !frame_empty;

  logic unused_rnw;
  assign unused_rnw = rnw;
endmodule
