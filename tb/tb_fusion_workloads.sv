// tb_fusion_workloads: the frame sizes at which the original system was
// evaluated (88x72 full frames, and 64x48, 40x40, 35x35, 32x24 extracts), run
// through the top level at its default parameters.  For each size the
// testbench plays the fusion software for one frame and one decomposition
// level of one tree: the rows and then the columns of a thermal and a visible
// test image are decomposed by the wavelet hardware (forward mode), the
// larger-magnitude coefficient is kept, and the fused coefficients are
// reconstructed, columns then rows (inverse mode).  Odd sizes are extended
// to even by repeating the last sample; every row or column is periodically
// extended by 6 samples on each side.  Commands alternate between two input
// and two output areas (double buffering).  Every command's result is
// compared with the filter formula.
//
// Per size it reports the number of commands, the hardware cycles they took
// (sum of the CYCLES register) and the bus clock cycles of the whole frame
// including register traffic.  The original evaluation repeated each frame 10
// times; the hardware keeps nothing between frames, so one frame per size is
// run.  Checked: all results, and that the hardware cycles per pixel fall as
// the frame grows (the fixed cost per command is shared by more samples).
module tb_fusion_workloads;
  import fusion_pkg::*;
  localparam logic [31:0] BASE = 32'h1000_0000;
  localparam int MEMW = 16384;
  localparam int AREA_IN0 = 0, AREA_IN1 = 2048, AREA_OUT0 = 8192, AREA_OUT1 = 12288;
  localparam int NSIZES = 5;
  localparam int SW [NSIZES] = '{32, 35, 40, 64, 88};
  localparam int SH [NSIZES] = '{24, 35, 40, 48, 72};

  logic aclk = 0, aresetn = 1;
  initial #1 aresetn = 0;
  always #5 aclk = ~aclk;
  int checks = 0, failures = 0;

  logic [11:0] w_awaddr, w_araddr;
  logic [3:0]  w_wstrb;
  logic w_awvalid, w_awready, w_wvalid, w_wready, w_bvalid, w_bready, w_arvalid, w_arready;
  logic w_rvalid, w_rready;
  logic [31:0] w_wdata, w_rdata;
  logic [1:0]  w_bresp, w_rresp;
  logic [31:0] m_araddr, m_awaddr, m_rdata, m_wdata;
  logic [7:0]  m_arlen, m_awlen, code_err;
  logic [2:0]  m_arsize, m_awsize, m_arprot, m_awprot;
  logic [1:0]  m_arburst, m_awburst, m_rresp, m_bresp, cam_bresp, cam_rresp;
  logic [3:0]  m_arcache, m_awcache, m_wstrb;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready, m_awvalid, m_awready;
  logic m_wlast, m_wvalid, m_wready, m_bvalid, m_bready, wav_done;
  logic cam_awready, cam_wready, cam_bvalid, cam_arready, cam_rvalid;
  logic [31:0] cam_rdata;
  logic frame_ready, vid_error;
  logic [15:0] frames_stored, frames_dropped;

  // the camera side is idle in this test: held in reset, bus ports quiet
  fusion_pl_top dut (
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
    .cam_awaddr(4'd0), .cam_awvalid(1'b0), .cam_awready, .cam_wdata(32'd0), .cam_wstrb(4'd0),
    .cam_wvalid(1'b0), .cam_wready, .cam_bresp, .cam_bvalid, .cam_bready(1'b1),
    .cam_araddr(4'd0), .cam_arvalid(1'b0), .cam_arready, .cam_rdata, .cam_rresp, .cam_rvalid,
    .cam_rready(1'b1),
    .mclr(1'b1), .thermal_clk(aclk), .thermal_data(8'd0), .sys_clk(aclk),
    .frame_ready, .vid_error, .code_err, .frames_stored, .frames_dropped);

  axil_master #(.AW(12)) wbus (.clk(aclk), .awaddr(w_awaddr), .awvalid(w_awvalid),
    .awready(w_awready), .wdata(w_wdata), .wstrb(w_wstrb), .wvalid(w_wvalid), .wready(w_wready),
    .bresp(w_bresp), .bvalid(w_bvalid), .bready(w_bready), .araddr(w_araddr),
    .arvalid(w_arvalid), .arready(w_arready), .rdata(w_rdata), .rresp(w_rresp),
    .rvalid(w_rvalid), .rready(w_rready));
  axi_mem_model #(.WORDS(MEMW), .BASE(BASE)) ddr (.clk(aclk),
    .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp),
    .bvalid(m_bvalid), .bready(m_bready));

  int now = 0;
  always @(posedge aclk) now <= now + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  data_t coef [4*TAPS];
  int n_cmd = 0, hw_cycles = 0, bad_cmd = 0, pp = 0;

  // one command on a vector of even length 2n; returns the 2n results
  task automatic hw_vec(input wav_mode_e mode, input data_t v [], output data_t y []);
    logic [31:0] st, cyc;
    logic [1:0] resp;
    int n, len, bank, bad = 0, polls = 0, in_off, out_off;
    data_t x [];
    len = v.size(); n = len / 2;
    bank = (mode == MODE_INVERSE) ? 2 : 0;
    in_off  = pp ? AREA_IN1 : AREA_IN0;
    out_off = pp ? AREA_OUT1 : AREA_OUT0;
    pp = !pp;
    x = new[len + TAPS];
    for (int i = 0; i < len + TAPS; i++) x[i] = v[(i - HALF_TAPS + len) % len];
    for (int i = 0; i < len + TAPS; i++) ddr.mem[in_off + i] = 32'(x[i]);
    wbus.write(REG_IN_OFF, 32'(in_off), resp);
    wbus.write(REG_OUT_OFF, 32'(out_off), resp);
    wbus.write(REG_OUTWIDTH, 32'(n), resp);
    wbus.write(REG_CTRL, {29'd0, mode, 1'b1}, resp);
    do begin wbus.read(REG_STATUS, st, resp); polls++; end while (!st[0] && polls < 100000);
    wbus.read(REG_CYCLES, cyc, resp);
    hw_cycles += int'(cyc);
    n_cmd++;
    y = new[len];
    for (int k = 0; k < n; k++) begin
      longint sa = 0, sb = 0;
      for (int j = 0; j < TAPS; j++) begin
        sa += longint'(coef[bank*TAPS + j]) * longint'(x[2*k + j]);
        sb += longint'(coef[(bank + 1)*TAPS + j]) * longint'(x[2*k + j]);
      end
      y[2*k]     = data_t'(sa >>> FRAC_BITS);
      y[2*k + 1] = data_t'(sb >>> FRAC_BITS);
    end
    for (int i = 0; i < len; i++) if (ddr.mem[out_off + i] != 32'(y[i])) bad++;
    if (st != 32'b001 || bad != 0) begin
      bad_cmd++;
      if (bad_cmd < 5) $display("%s n=%0d: status %b, %0d wrong words", mode.name(), n, st, bad);
    end
  endtask

  function automatic data_t thermal_px(input int x, input int y);
    return data_t'({8'(((x - 20) * (x - 20) + (y - 15) * (y - 15)) % 256), 16'd0});
  endfunction
  function automatic data_t visible_px(input int x, input int y);
    return data_t'({8'((x * 9 + y * 5) % 256), 16'd0});
  endfunction
  function automatic data_t absd(input data_t a);
    return a < 0 ? -a : a;
  endfunction

  // forward rows then columns of one W x H image (already padded to even)
  task automatic forward2d(input int w, input int h, inout data_t img []);
    data_t v [], y [];
    v = new[w];
    for (int r = 0; r < h; r++) begin
      for (int c = 0; c < w; c++) v[c] = img[r*w + c];
      hw_vec(MODE_FORWARD, v, y);
      for (int c = 0; c < w; c++) img[r*w + c] = y[c];
    end
    v = new[h];
    for (int c = 0; c < w; c++) begin
      for (int r = 0; r < h; r++) v[r] = img[r*w + c];
      hw_vec(MODE_FORWARD, v, y);
      for (int r = 0; r < h; r++) img[r*w + c] = y[r];
    end
  endtask
  task automatic inverse2d(input int w, input int h, inout data_t img []);
    data_t v [], y [];
    v = new[h];
    for (int c = 0; c < w; c++) begin
      for (int r = 0; r < h; r++) v[r] = img[r*w + c];
      hw_vec(MODE_INVERSE, v, y);
      for (int r = 0; r < h; r++) img[r*w + c] = y[r];
    end
    v = new[w];
    for (int r = 0; r < h; r++) begin
      for (int c = 0; c < w; c++) v[c] = img[r*w + c];
      hw_vec(MODE_INVERSE, v, y);
      for (int c = 0; c < w; c++) img[r*w + c] = y[c];
    end
  endtask

  initial begin
    logic [31:0] st;
    logic [1:0] resp;
    int polls;
    real per_px [NSIZES];
    for (int i = 0; i < MEMW; i++) ddr.mem[i] = 0;
    repeat (3) @(negedge aclk);
    aresetn = 1;
    wbus.write(REG_MEM_BASE, BASE, resp);
    for (int k = 0; k < 4*TAPS; k++) begin
      coef[k] = data_t'($signed($urandom_range(0, 1 << 15)) - (1 << 14));
      wbus.write(REG_COEFF + 12'(4*k), 32'(coef[k]), resp);
    end
    wbus.write(REG_CTRL, {29'd0, MODE_COEFF, 1'b1}, resp);
    polls = 0;
    do begin wbus.read(REG_STATUS, st, resp); polls++; end while (!st[0] && polls < 1000);
    check(st == 32'b001, "coefficient load");

    for (int s = 0; s < NSIZES; s++) begin
      int w, h, t0, c0, h0;
      data_t ti [], vi [];
      w = SW[s] + SW[s] % 2; h = SH[s] + SH[s] % 2;
      ti = new[w*h]; vi = new[w*h];
      for (int r = 0; r < h; r++)
        for (int c = 0; c < w; c++) begin
          int sc, sr;
          sc = (c < SW[s]) ? c : SW[s] - 1;
          sr = (r < SH[s]) ? r : SH[s] - 1;
          ti[r*w + c] = thermal_px(sc, sr);
          vi[r*w + c] = visible_px(sc, sr);
        end
      t0 = now; c0 = n_cmd; h0 = hw_cycles; bad_cmd = 0;
      forward2d(w, h, ti);
      forward2d(w, h, vi);
      for (int i = 0; i < w*h; i++) if (absd(vi[i]) > absd(ti[i])) ti[i] = vi[i];
      inverse2d(w, h, ti);
      check(bad_cmd == 0, $sformatf("%0dx%0d: %0d commands wrong", SW[s], SH[s], bad_cmd));
      per_px[s] = real'(hw_cycles - h0) / real'(SW[s] * SH[s]);
      $display("%0dx%0d: %0d commands, %0d hardware cycles (%0.2f per pixel), %0d bus cycles",
               SW[s], SH[s], n_cmd - c0, hw_cycles - h0, per_px[s], now - t0);
    end
    for (int s = 1; s < NSIZES; s++)
      check(per_px[s] < per_px[s-1], $sformatf("cycles per pixel did not fall from %0dx%0d to %0dx%0d",
                                              SW[s-1], SH[s-1], SW[s], SH[s]));
    check(ddr.stalls > 0 && ddr.wlast_err == 0, "memory wait states / WLAST");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000000) @(posedge aclk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
