// tb_wav_memcpy: the DMA against a memory model with random wait states.
// Copies rows memory->buffer and buffer->memory at addresses that force
// bursts to split at 4 KiB boundaries, checks every word, checks each burst
// obeys the 16-beat and 4 KiB rules and that WLAST is placed right, and checks
// that a copy from outside the memory reports an error.
module tb_wav_memcpy;
  import fusion_pkg::*;
  localparam int unsigned BUF_AW = 12;
  localparam logic [31:0] BASE = 32'h1000_0000;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, to_mem, busy, done, err;
  logic [31:0] addr;
  logic [BUF_AW-1:0] words;
  logic buf_wr_en, buf_rd_en;
  logic [BUF_AW-1:0] buf_wr_addr, buf_rd_addr;
  data_t buf_wr_data, buf_rd_data;
  logic [31:0] araddr, awaddr, rdata, wdata;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize, arprot, awprot;
  logic [1:0] arburst, awburst, rresp, bresp;
  logic [3:0] arcache, awcache, wstrb;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;

  wav_memcpy #(.BUF_AW(BUF_AW)) dut (
    .clk, .rst_n, .start, .to_mem, .addr, .words, .busy, .done, .err,
    .buf_wr_en, .buf_wr_addr, .buf_wr_data, .buf_rd_en, .buf_rd_addr, .buf_rd_data,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_arcache(arcache),
    .m_arprot(arprot), .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp),
    .m_rlast(rlast), .m_rvalid(rvalid), .m_rready(rready),
    .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst), .m_awcache(awcache),
    .m_awprot(awprot), .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb),
    .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready), .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready)
  );

  axi_mem_model #(.WORDS(4096), .BASE(BASE)) mem (
    .clk, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready
  );

  // buffer model: write port, read port with one cycle latency
  data_t bufm [2**BUF_AW];
  always @(posedge clk) begin
    if (buf_wr_en) bufm[buf_wr_addr] <= buf_wr_data;
    if (buf_rd_en) buf_rd_data <= bufm[buf_rd_addr];
  end

  // burst rules
  int bursts = 0;
  always @(posedge clk) begin
    if (arvalid && arready) begin
      bursts++;
      checks++;
      if (arlen > 15 || (araddr[11:0] + 4*(arlen+1)) > 13'h1000 || arsize != 3'b010 || arburst != 2'b01) begin
        failures++;
        $display("bad read burst addr=%h len=%0d", araddr, arlen);
      end
    end
    if (awvalid && awready) begin
      bursts++;
      checks++;
      if (awlen > 15 || (awaddr[11:0] + 4*(awlen+1)) > 13'h1000) begin
        failures++;
        $display("bad write burst addr=%h len=%0d", awaddr, awlen);
      end
    end
  end

  task automatic copy(input bit dir, input logic [31:0] a, input int n, input bit expect_err);
    int t = 0;
    @(posedge clk);
    start <= 1; to_mem <= dir; addr <= a; words <= BUF_AW'(n);
    @(posedge clk);
    start <= 0;
    while (!done && t < 20000) begin @(posedge clk); t++; end
    checks++;
    if (!done || err != expect_err) begin
      failures++;
      $display("copy dir=%0d addr=%h n=%0d: done=%0d err=%0d", dir, a, n, done, err);
    end
  endtask

  initial begin
    start = 0; to_mem = 0; addr = 0; words = 0;
    for (int i = 0; i < 4096; i++) mem.mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // memory -> buffer, starting 40 words below a 4 KiB boundary
    copy(0, BASE + 32'h1000 - 160, 100, 0);
    for (int i = 0; i < 100; i++) begin
      checks++;
      if (bufm[i] !== data_t'(mem.mem[1024 - 40 + i])) begin
        failures++;
        $display("read word %0d: %h / %h", i, bufm[i], mem.mem[1024 - 40 + i]);
      end
    end
    // buffer -> memory, 77 words straddling the next boundary
    for (int i = 0; i < 77; i++) bufm[i] = data_t'($urandom);
    copy(1, BASE + 32'h2000 - 4*30, 77, 0);
    for (int i = 0; i < 77; i++) begin
      checks++;
      if (mem.mem[2048 - 30 + i] !== 32'(bufm[i])) begin
        failures++;
        $display("write word %0d: %h / %h", i, mem.mem[2048 - 30 + i], bufm[i]);
      end
    end
    // one-word and sixteen-word copies
    copy(0, BASE + 32'h40, 1, 0);
    checks++; if (bufm[0] !== data_t'(mem.mem[16])) failures++;
    copy(1, BASE + 32'h80, 16, 0);
    // out of range: error reported
    copy(0, BASE + 32'h4000, 8, 1);
    checks++;
    if (mem.wlast_err != 0 || mem.stalls == 0) begin
      failures++;
      $display("wlast errors %0d, stalls %0d", mem.wlast_err, mem.stalls);
    end
    $display("bursts %0d, memory wait states %0d", bursts, mem.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
