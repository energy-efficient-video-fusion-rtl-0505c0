// tb_fusion_pl_top: end-to-end run of the programmable-logic part of the
// video fusion system, with the testbench acting as the processor software
// and a behavioural camera and DDR memory around the design.
//
// Flow: the thermal camera (BT.656) streams fields; the software enables
// capture, loads the 48 wavelet coefficients, waits for a scaled frame, reads
// it pixel by pixel over the camera's AXI4-Lite port and checks it.  Each
// frame row is then fused with a synthetic visible-camera row the way the
// fusion software does it: both rows are decomposed by the wavelet hardware
// (forward mode), the larger-magnitude coefficient of each pair is kept, and
// the fused row is sent back through the hardware (inverse mode).  Input
// rows are periodically extended by TAPS words as the software does, and two
// input and two output areas are used in turn (double buffering).  Every
// hardware result is compared with the filter formula.
//
// Mechanisms counted (each must occur at least once): coefficient load,
// forward rows, inverse rows, memory wait states, 4 KiB-split bursts,
// refused command (OUTWIDTH too large), frames dropped by the full frame
// store, DATA read refused while no frame waits, corrupted BT.656 code
// detected, samples dropped and lines repeated by the scaler (seen as a
// correct scaled frame).
module tb_fusion_pl_top;
  import fusion_pkg::*;
  // ---- sizes (reduced: the full-size run is tb_fusion_full) ----
  localparam int MAXW = 256, W = 12, H = 5, OW = 8, OH = 9, HBL = 8, VBL = 2, ROWS = OH;
  localparam logic [31:0] BASE = 32'h1000_0000;
  localparam int MEMW = 16384;
  localparam int AREA_IN0 = 0, AREA_IN1 = 2048, AREA_OUT0 = 8192, AREA_OUT1 = 12288;

  logic aclk = 0, aresetn = 1, tclk = 0, sclk = 0, mclr = 0;
  initial begin #1 aresetn = 0; mclr = 1; end
  always #5 aclk = ~aclk;          // 100 MHz programmable-logic clock
  always #18.5 tclk = ~tclk;       // 27 MHz camera byte clock
  always #4 sclk = ~sclk;          // scaler clock from the clock generator
  int checks = 0, failures = 0;

  // ---- design ----
  logic [11:0] w_awaddr, w_araddr;
  logic [3:0]  c_awaddr, c_araddr, w_wstrb, c_wstrb;
  logic w_awvalid, w_awready, w_wvalid, w_wready, w_bvalid, w_bready, w_arvalid, w_arready;
  logic w_rvalid, w_rready, c_awvalid, c_awready, c_wvalid, c_wready, c_bvalid, c_bready;
  logic c_arvalid, c_arready, c_rvalid, c_rready;
  logic [31:0] w_wdata, w_rdata, c_wdata, c_rdata;
  logic [1:0]  w_bresp, w_rresp, c_bresp, c_rresp;
  logic [31:0] m_araddr, m_awaddr, m_rdata, m_wdata;
  logic [7:0]  m_arlen, m_awlen, thermal_data, code_err;
  logic [2:0]  m_arsize, m_awsize, m_arprot, m_awprot;
  logic [1:0]  m_arburst, m_awburst, m_rresp, m_bresp;
  logic [3:0]  m_arcache, m_awcache, m_wstrb;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready, m_awvalid, m_awready;
  logic m_wlast, m_wvalid, m_wready, m_bvalid, m_bready, wav_done;
  logic frame_ready, vid_error;
  logic [15:0] frames_stored, frames_dropped;

  fusion_pl_top #(.MAX_WIDTH(MAXW), .IN_W(W), .IN_H(H), .OUT_W(OW), .OUT_H(OH)) dut (
    .aclk, .aresetn,
    .wav_awaddr(w_awaddr), .wav_awvalid(w_awvalid), .wav_awready(w_awready),
    .wav_wdata(w_wdata), .wav_wstrb(w_wstrb), .wav_wvalid(w_wvalid), .wav_wready(w_wready),
    .wav_bresp(w_bresp), .wav_bvalid(w_bvalid), .wav_bready(w_bready),
    .wav_araddr(w_araddr), .wav_arvalid(w_arvalid), .wav_arready(w_arready),
    .wav_rdata(w_rdata), .wav_rresp(w_rresp), .wav_rvalid(w_rvalid), .wav_rready(w_rready),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arcache, .m_arprot, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awcache, .m_awprot, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready, .m_bresp, .m_bvalid, .m_bready,
    .wav_done,
    .cam_awaddr(c_awaddr), .cam_awvalid(c_awvalid), .cam_awready(c_awready),
    .cam_wdata(c_wdata), .cam_wstrb(c_wstrb), .cam_wvalid(c_wvalid), .cam_wready(c_wready),
    .cam_bresp(c_bresp), .cam_bvalid(c_bvalid), .cam_bready(c_bready),
    .cam_araddr(c_araddr), .cam_arvalid(c_arvalid), .cam_arready(c_arready),
    .cam_rdata(c_rdata), .cam_rresp(c_rresp), .cam_rvalid(c_rvalid), .cam_rready(c_rready),
    .mclr, .thermal_clk(tclk), .thermal_data, .sys_clk(sclk),
    .frame_ready, .vid_error, .code_err, .frames_stored, .frames_dropped);

  // ---- surroundings: processor ports, DDR, thermal camera ----
  axil_master #(.AW(12)) wbus (.clk(aclk), .awaddr(w_awaddr), .awvalid(w_awvalid),
    .awready(w_awready), .wdata(w_wdata), .wstrb(w_wstrb), .wvalid(w_wvalid), .wready(w_wready),
    .bresp(w_bresp), .bvalid(w_bvalid), .bready(w_bready), .araddr(w_araddr),
    .arvalid(w_arvalid), .arready(w_arready), .rdata(w_rdata), .rresp(w_rresp),
    .rvalid(w_rvalid), .rready(w_rready));
  axil_master #(.AW(4)) cbus (.clk(aclk), .awaddr(c_awaddr), .awvalid(c_awvalid),
    .awready(c_awready), .wdata(c_wdata), .wstrb(c_wstrb), .wvalid(c_wvalid), .wready(c_wready),
    .bresp(c_bresp), .bvalid(c_bvalid), .bready(c_bready), .araddr(c_araddr),
    .arvalid(c_arvalid), .arready(c_arready), .rdata(c_rdata), .rresp(c_rresp),
    .rvalid(c_rvalid), .rready(c_rready));
  axi_mem_model #(.WORDS(MEMW), .BASE(BASE)) ddr (.clk(aclk),
    .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp),
    .bvalid(m_bvalid), .bready(m_bready));
  logic cam_run = 0, bad_code = 0;
  int cam_frame, cam_line;
  bt656_source #(.W(W), .H(H), .HBL(HBL), .VBL(VBL)) thermal (.clk(tclk), .run(cam_run),
    .bad_code, .data(thermal_data), .frame(cam_frame), .line_no(cam_line));

  // bursts split at a 4 KiB boundary: a burst that ends on one
  int split_bursts = 0;
  always @(posedge aclk) begin
    if (m_arvalid && m_arready && m_arlen != 8'd15 && ((m_araddr + 4 * (m_arlen + 1)) % 4096) == 0)
      split_bursts++;
    if (m_awvalid && m_awready && m_awlen != 8'd15 && ((m_awaddr + 4 * (m_awlen + 1)) % 4096) == 0)
      split_bursts++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- reference models ----
  function automatic logic [7:0] luma(input int x, input int y, input int f);
    return 8'(16 + ((x * 3 + y * 7 + f * 11) % 200));
  endfunction
  function automatic logic [7:0] visible(input int x, input int y);
    return 8'((x * 5 + y * 13) % 256);
  endfunction
  int sx [OW], sy [OH];           // source sample / line of each scaled pixel
  initial begin
    for (int o = 0; o < OW; o++) begin
      sx[o] = W - 1;
      for (int x = W - 1; x >= 0; x--) if ((x + 1) * OW / W > o) sx[o] = x;
    end
    for (int o = 0; o < OH; o++) begin
      sy[o] = H - 1;
      for (int y = H - 1; y >= 0; y--) if ((y + 1) * OH / H > o) sy[o] = y;
    end
  end

  data_t coef [4*TAPS];
  logic [7:0] frame_buf [OW*OH];
  int n_coeff = 0, n_fwd = 0, n_inv = 0, n_refused = 0, n_empty_err = 0, n_frames = 0;

  // runs one row command and checks the result; x holds the 2n+TAPS inputs
  task automatic hw_row(input wav_mode_e mode, input int n, input int in_off, input int out_off,
                        input data_t x [], output data_t y []);
    logic [31:0] st;
    logic [1:0] resp;
    int bank, bad = 0, polls = 0;
    bank = (mode == MODE_INVERSE) ? 2 : 0;
    for (int i = 0; i < 2*n + TAPS; i++) ddr.mem[in_off + i] = 32'(x[i]);
    wbus.write(REG_IN_OFF, 32'(in_off), resp);
    wbus.write(REG_OUT_OFF, 32'(out_off), resp);
    wbus.write(REG_OUTWIDTH, 32'(n), resp);
    wbus.write(REG_CTRL, {29'd0, mode, 1'b1}, resp);
    do begin wbus.read(REG_STATUS, st, resp); polls++; end while (!st[0] && polls < 100000);
    check(st == 32'b001, $sformatf("row status %b", st));
    y = new[2*n];
    for (int k = 0; k < n; k++) begin
      longint sa = 0, sb = 0;
      for (int j = 0; j < TAPS; j++) begin
        sa += longint'(coef[bank*TAPS + j]) * longint'(x[2*k + j]);
        sb += longint'(coef[(bank + 1)*TAPS + j]) * longint'(x[2*k + j]);
      end
      y[2*k]     = data_t'(sa >>> FRAC_BITS);
      y[2*k + 1] = data_t'(sb >>> FRAC_BITS);
    end
    for (int i = 0; i < 2*n; i++) if (ddr.mem[out_off + i] != 32'(y[i])) bad++;
    check(bad == 0, $sformatf("%s row n=%0d: %0d wrong words", mode.name(), n, bad));
    if (mode == MODE_FORWARD) n_fwd++; else n_inv++;
  endtask

  // periodic extension by TAPS/2 on each side, in Q15.16
  function automatic void extend(input data_t v [], output data_t x []);
    int len = v.size();
    x = new[len + TAPS];
    for (int i = 0; i < len + TAPS; i++) x[i] = v[(i - HALF_TAPS + len) % len];
  endfunction

  initial begin
    logic [31:0] d, st;
    logic [1:0] resp;
    int f, bad, polls;
    for (int i = 0; i < MEMW; i++) ddr.mem[i] = 0;
    repeat (3) @(negedge aclk);
    aresetn = 1; mclr = 0;
    cam_run = 1;

    // camera: refused DATA read, then capture on
    cbus.read(4'(CAM_REG_DATA), d, resp);
    if (resp == RESP_SLVERR) n_empty_err++;
    cbus.write(4'(CAM_REG_CTRL), 32'h1, resp);

    // wavelet: base address and coefficients (mode 1)
    wbus.write(REG_MEM_BASE, BASE, resp);
    for (int k = 0; k < 4*TAPS; k++) begin
      coef[k] = data_t'($signed($urandom_range(0, 1 << 17)) - (1 << 16));
      wbus.write(REG_COEFF + 12'(4*k), 32'(coef[k]), resp);
    end
    wbus.write(REG_CTRL, {29'd0, MODE_COEFF, 1'b1}, resp);
    polls = 0;
    do begin wbus.read(REG_STATUS, st, resp); polls++; end while (!st[0] && polls < 1000);
    check(st == 32'b001, "coefficient load");
    n_coeff++;

    // a bad OUTWIDTH is refused
    wbus.write(REG_OUTWIDTH, 32'(MAXW / 2 + 1), resp);
    wbus.write(REG_CTRL, {29'd0, MODE_FORWARD, 1'b1}, resp);
    polls = 0;
    do begin wbus.read(REG_STATUS, st, resp); polls++; end while (!st[0] && polls < 1000);
    if (st == 32'b101) n_refused++;

    // inject one corrupted timing code into the camera stream
    wait (cam_frame == 1);
    @(negedge tclk) bad_code = 1;
    @(negedge tclk) bad_code = 0;
    wait (cam_frame == 3);          // let the full store drop a field

    // read one scaled frame
    polls = 0;
    do begin cbus.read(4'(CAM_REG_STATUS), d, resp); polls++; end while (!d[0] && polls < 100000);
    bad = 0; f = -1;
    for (int i = 0; i < OW * OH; i++) begin
      cbus.read(4'(CAM_REG_DATA), d, resp);
      frame_buf[i] = d[7:0];
      if (i == 0)
        for (int k = 0; k < 64; k++) if (d[7:0] == luma(sx[0], sy[0], k)) begin f = k; break; end
      if (resp != RESP_OKAY || d[7:0] != luma(sx[i % OW], sy[i / OW], f)) bad++;
    end
    check(f >= 0 && bad == 0, $sformatf("scaled frame: %0d wrong pixels", bad));
    if (bad == 0) n_frames++;

    // fuse each row
    for (int r = 0; r < ROWS; r++) begin
      data_t tv [], vv [], tx [], vx [], tc [], vc [], fc [], fx [], out [];
      tv = new[OW]; vv = new[OW];
      for (int x = 0; x < OW; x++) begin
        tv[x] = data_t'({frame_buf[r*OW + x], 16'd0});
        vv[x] = data_t'({visible(x, r), 16'd0});
      end
      extend(tv, tx);
      extend(vv, vx);
      hw_row(MODE_FORWARD, OW / 2, (r % 2) ? AREA_IN1 : AREA_IN0, AREA_OUT0, tx, tc);
      hw_row(MODE_FORWARD, OW / 2, (r % 2) ? AREA_IN0 : AREA_IN1, AREA_OUT1, vx, vc);
      fc = new[OW];
      for (int i = 0; i < OW; i++)
        fc[i] = ((tc[i] < 0 ? -tc[i] : tc[i]) >= (vc[i] < 0 ? -vc[i] : vc[i])) ? tc[i] : vc[i];
      extend(fc, fx);
      hw_row(MODE_INVERSE, OW / 2, (r % 2) ? AREA_IN1 : AREA_IN0, (r % 2) ? AREA_OUT1 : AREA_OUT0,
             fx, out);
    end
    // a long row that crosses 4 KiB pages
    begin
      data_t lv [], lx [], lc [];
      lv = new[MAXW];
      for (int i = 0; i < MAXW; i++) lv[i] = data_t'($urandom_range(0, 1 << 24));
      extend(lv, lx);
      hw_row(MODE_FORWARD, MAXW / 2, 1000, 9200, lx, lc);
    end

    $display("coeff loads %0d, forward rows %0d, inverse rows %0d, refused %0d",
             n_coeff, n_fwd, n_inv, n_refused);
    $display("memory wait states %0d, 4KiB splits %0d, frames read %0d, dropped %0d",
             ddr.stalls, split_bursts, n_frames, frames_dropped);
    $display("empty DATA reads refused %0d, BT.656 code errors %0d", n_empty_err, code_err);
    check(n_coeff > 0, "no coefficient load");
    check(n_fwd > 0, "no forward row");
    check(n_inv > 0, "no inverse row");
    check(n_refused > 0, "no refused command");
    check(ddr.stalls > 0, "no memory wait state");
    check(split_bursts > 0, "no 4 KiB split");
    check(n_frames > 0, "no scaled frame (sample drop / line repeat)");
    check(frames_dropped > 0, "no frame dropped by the frame store");
    check(n_empty_err > 0, "no refused DATA read");
    check(code_err > 0, "no corrupted timing code detected");
    check(!vid_error && ddr.wlast_err == 0, "bridge overflow or bad WLAST");
    check(wav_done, "done interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge aclk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
