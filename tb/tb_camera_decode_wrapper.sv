// tb_camera_decode_wrapper: the camera capture system as the processor sees
// it.  A behavioural BT.656 camera (12x5 per field, scaled to 8x9) runs while
// an AXI4-Lite master: reads DATA before capture is enabled (must be refused
// with SLVERR), writes CTRL to enable capture, polls STATUS until a frame is
// waiting, reads the frame one pixel per DATA read and compares each with the
// scaled camera luma, checks PIXCNT, checks that a write to a read-only
// register is refused, and that a second frame follows.
module tb_camera_decode_wrapper;
  import fusion_pkg::*;
  localparam int W = 12, H = 5, OW = 8, OH = 9;
  logic tclk = 0, sclk = 0, aclk = 0, mclr = 0, aresetn = 1;
  initial begin #1 mclr = 1; aresetn = 0; end
  always #18.5 tclk = ~tclk;
  always #5 sclk = ~sclk;
  always #6 aclk = ~aclk;
  int checks = 0, failures = 0;

  logic run = 0, bad_code = 0;
  logic [7:0] data, code_err;
  int frame, line_no;
  logic [3:0] awaddr, araddr, wstrb;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  logic frame_ready, vid_error;
  logic [15:0] frames_stored, frames_dropped;

  bt656_source #(.W(W), .H(H), .HBL(8), .VBL(2)) cam (.clk(tclk), .run, .bad_code, .data,
                                                       .frame, .line_no);
  axil_master #(.AW(4)) bfm (.clk(aclk), .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid,
    .wready, .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid,
    .rready);
  camera_decode_wrapper #(.IN_W(W), .IN_H(H), .OUT_W(OW), .OUT_H(OH), .FIFO_AW(5)) dut (
    .mclr, .thermal_clk(tclk), .thermal_data(data), .sys_clk(sclk), .s_axi_aclk(aclk),
    .s_axi_aresetn(aresetn), .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp),
    .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid),
    .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .frame_ready, .vid_error, .code_err, .frames_stored, .frames_dropped);

  function automatic logic [7:0] luma(input int x, input int y, input int f);
    return 8'(16 + ((x * 3 + y * 7 + f * 11) % 200));
  endfunction
  function automatic int src_x(input int ox);
    for (int x = 0; x < W; x++) if ((x + 1) * OW / W > ox) return x;
    return W - 1;
  endfunction
  function automatic int src_y(input int oy);
    for (int y = 0; y < H; y++) if ((y + 1) * OH / H > oy) return y;
    return H - 1;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_frame();
    logic [31:0] d;
    logic [1:0] resp;
    int polls = 0;
    do begin
      bfm.read(4'(CAM_REG_STATUS), d, resp);
      polls++;
    end while (d[0] == 0 && polls < 5000);
    check(d[0] == 1, "no frame became ready");
  endtask

  task automatic read_frame(output int f);
    logic [31:0] d;
    logic [1:0] resp;
    int bad = 0;
    f = -1;
    for (int i = 0; i < OW * OH; i++) begin
      bfm.read(4'(CAM_REG_DATA), d, resp);
      if (i == 0)
        for (int k = 0; k < 64; k++) if (d[7:0] == luma(src_x(0), src_y(0), k)) begin f = k; break; end
      if (resp != RESP_OKAY || d != {24'd0, luma(src_x(i % OW), src_y(i / OW), f)}) begin
        bad++;
        if (bad < 5) $display("pixel %0d: %h resp %0d", i, d, resp);
      end
    end
    check(f >= 0 && bad == 0, $sformatf("frame read: %0d bad pixels", bad));
    bfm.read(4'(CAM_REG_PIXCNT), d, resp);
    check(d == OW * OH, $sformatf("pixel count %0d", d));
  endtask

  initial begin
    logic [31:0] d;
    logic [1:0] resp;
    int f1, f2;
    repeat (3) @(negedge aclk);
    mclr = 0; aresetn = 1;
    run = 1;
    bfm.read(4'(CAM_REG_DATA), d, resp);
    check(resp == RESP_SLVERR, "DATA read with no frame not refused");
    bfm.write(4'(CAM_REG_CTRL), 32'h1, resp);
    bfm.read(4'(CAM_REG_CTRL), d, resp);
    check(resp == RESP_OKAY && d == 1, "CTRL readback");
    bfm.write(4'(CAM_REG_STATUS), 32'h1, resp);
    check(resp == RESP_SLVERR, "STATUS write not refused");
    wait_frame();
    check(frame_ready, "frame_ready output");
    read_frame(f1);
    bfm.write(4'(CAM_REG_CTRL), 32'h1, resp);      // clears the pixel count
    wait_frame();
    read_frame(f2);
    check(f2 > f1 && !vid_error && code_err == 0, $sformatf("fields %0d %0d", f1, f2));
    $display("fields read %0d and %0d, dropped %0d", f1, f2, frames_dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge aclk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
