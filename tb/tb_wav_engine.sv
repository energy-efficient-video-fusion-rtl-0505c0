// tb_wav_engine: the wavelet hardware driven the way the processor drives it.
// Loads 48 coefficients (coefficient-loading mode), then runs forward and
// inverse row commands against a memory model with random wait states, using
// two input and two output areas in turn as the driver's double buffering
// does.  Every output word is compared with the filter formula
//   out[2k] = (sum_j A[j] x[2k+j]) >>> 16,  out[2k+1] = (sum_j B[j] x[2k+j]) >>> 16
// with (A, B) the forward or the inverse bank.  Also checks that the filter
// phase takes OUTWIDTH + 9 cycles plus 3 of DMA hand-over (one loop iteration per cycle), that the
// done flag and cycle counter behave, and that a bad OUTWIDTH is refused.
module tb_wav_engine;
  import fusion_pkg::*;
  localparam logic [31:0] BASE = 32'h1000_0000;
  localparam int MEMW = 16384;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [11:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic [31:0] m_araddr, m_awaddr, m_rdata, m_wdata;
  logic [7:0] m_arlen, m_awlen;
  logic [2:0] m_arsize, m_awsize, m_arprot, m_awprot;
  logic [1:0] m_arburst, m_awburst, m_rresp, m_bresp;
  logic [3:0] m_arcache, m_awcache, m_wstrb;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready, m_awvalid, m_awready;
  logic m_wlast, m_wvalid, m_wready, m_bvalid, m_bready, irq_done;

  wav_engine dut (.clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arcache, .m_arprot, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awcache, .m_awprot, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready, .m_bresp, .m_bvalid, .m_bready,
    .irq_done);

  axil_master #(.AW(12)) bus (.clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  axi_mem_model #(.WORDS(MEMW), .BASE(BASE)) mem (.clk,
    .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata),
    .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata),
    .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid),
    .bready(m_bready));

  // Filter-phase timing seen from the memory port: cycles from the last read
  // beat of a command to the first write address of the same command.
  int now = 0, rd_words = 0, t_last_r = 0, gap = 0, want_words = 0;
  bit aw_seen = 0;
  always @(posedge clk) begin
    now <= now + 1;
    if (m_rvalid && m_rready) begin
      rd_words <= rd_words + 1;
      if (rd_words + 1 == want_words) t_last_r <= now;
    end
    if (m_awvalid && !aw_seen) begin
      aw_seen <= 1;
      gap     <= now - t_last_r;
    end
  end

  task automatic expect32(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %h, expected %h", what, got, exp); end
  endtask

  logic [1:0] resp;
  logic [31:0] d;
  data_t coef [4*TAPS];

  // poll STATUS until done; return the status word
  task automatic wait_done(output logic [31:0] st);
    int n = 0;
    do begin bus.read(REG_STATUS, st, resp); n++; end while (!st[0] && n < 5000);
  endtask

  data_t x [2*1024 + TAPS];
  task automatic run_row(input wav_mode_e mode, input int n, input int in_off, input int out_off);
    logic [31:0] st, cyc;
    int bank;
    bank = (mode == MODE_INVERSE) ? 2 : 0;
    for (int i = 0; i < 2*n + TAPS; i++) begin
      x[i] = data_t'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
      mem.mem[in_off + i] = 32'(x[i]);
    end
    for (int i = 0; i < 2*n + 4; i++) mem.mem[out_off + i] = 32'hA5A5_A5A5;
    bus.write(REG_IN_OFF, 32'(in_off), resp);
    bus.write(REG_OUT_OFF, 32'(out_off), resp);
    bus.write(REG_OUTWIDTH, 32'(n), resp);
    rd_words = 0; want_words = 2*n + TAPS; aw_seen = 0;
    bus.write(REG_CTRL, {29'd0, mode, 1'b1}, resp);
    wait_done(st);
    expect32("status", st, 32'b001);
    // filter loop n+6 iterations + 3 pipeline cycles, plus 3 for the hand-over
    // from the read DMA and to the write DMA
    expect32("filter phase cycles", 32'(gap), 32'(n + HALF_TAPS + 3 + 3));
    bus.read(REG_CYCLES, cyc, resp);
    checks++;
    if (cyc < 32'(n + HALF_TAPS + 3 + 4*n + TAPS)) begin
      failures++; $display("cycle counter %0d too small", cyc);
    end
    for (int k = 0; k < n; k++) begin
      longint sa = 0, sb = 0;
      for (int j = 0; j < TAPS; j++) begin
        sa += longint'(coef[(bank)*TAPS + j]) * longint'(x[2*k+j]);
        sb += longint'(coef[(bank+1)*TAPS + j]) * longint'(x[2*k+j]);
      end
      expect32("even output", mem.mem[out_off + 2*k],     32'(sa >>> FRAC_BITS));
      expect32("odd output",  mem.mem[out_off + 2*k + 1], 32'(sb >>> FRAC_BITS));
    end
    expect32("no overrun", mem.mem[out_off + 2*n], 32'hA5A5_A5A5);
  endtask

  initial begin
    logic [31:0] st;
    for (int i = 0; i < MEMW; i++) mem.mem[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bus.write(REG_MEM_BASE, BASE, resp);
    for (int k = 0; k < 4*TAPS; k++) begin
      coef[k] = data_t'($signed($urandom_range(0, 1 << 18)) - (1 << 17));
      bus.write(REG_COEFF + 12'(4*k), 32'(coef[k]), resp);
    end
    bus.write(REG_CTRL, {29'd0, MODE_COEFF, 1'b1}, resp);
    wait_done(st);
    expect32("coefficient load done", st, 32'b001);
    // ping-pong: area 1 then area 2, forward then inverse
    run_row(MODE_FORWARD, 44, 0,    8192);
    run_row(MODE_FORWARD, 36, 2048, 12288);
    run_row(MODE_INVERSE, 44, 0,    8192);
    run_row(MODE_INVERSE, 20, 2048, 12288);
    run_row(MODE_FORWARD, 1,  100,  9000);
    // a long row crossing several 4 KiB pages
    run_row(MODE_FORWARD, 1000, 4000, 10000);
    // refused command
    bus.write(REG_OUTWIDTH, 32'd0, resp);
    bus.write(REG_CTRL, {29'd0, MODE_FORWARD, 1'b1}, resp);
    wait_done(st);
    expect32("outwidth 0 refused", st, 32'b101);
    expect32("irq", 32'(irq_done), 1);
    checks++;
    if (mem.stalls == 0) begin failures++; $display("no memory wait states seen"); end
    $display("memory wait states %0d", mem.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
