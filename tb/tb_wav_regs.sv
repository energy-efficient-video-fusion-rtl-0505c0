// tb_wav_regs: AXI4-Lite register file of the wavelet engine.  Writes and reads
// back every register and all 48 coefficients, checks byte strobes, the start
// pulse and its mode, that start is ignored while busy, the done and error
// flags, and SLVERR for unmapped addresses.
module tb_wav_regs;
  import fusion_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [11:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic cmd_start;
  wav_mode_e cmd_mode;
  logic [31:0] in_off, out_off, outwidth, mem_base;
  data_t coeff_stage [4*TAPS];
  logic busy = 0, done_pulse = 0, dma_err = 0;
  logic [31:0] cycles = 32'd1234;

  wav_regs dut (.clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready),
    .cmd_start, .cmd_mode, .in_off, .out_off, .outwidth, .mem_base, .coeff_stage,
    .busy, .done_pulse, .dma_err, .cycles);

  axil_master #(.AW(12)) bus (.clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  int starts = 0;
  wav_mode_e last_mode;
  always @(posedge clk) if (cmd_start) begin starts++; last_mode = cmd_mode; end

  task automatic expect32(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %h, expected %h", what, got, exp); end
  endtask

  logic [1:0] resp;
  logic [31:0] d;
  logic [31:0] cval [4*TAPS];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    bus.write(REG_IN_OFF, 32'h0000_0123, resp);   expect32("resp", 32'(resp), 0);
    bus.write(REG_OUT_OFF, 32'h0000_0456, resp);
    bus.write(REG_OUTWIDTH, 32'd44, resp);
    bus.write(REG_MEM_BASE, 32'h1000_0000, resp);
    bus.write(REG_MEM_BASE, 32'h0000_AB00, resp, 4'b0010);   // one byte lane
    expect32("in_off", in_off, 32'h123);
    expect32("out_off", out_off, 32'h456);
    expect32("outwidth", outwidth, 44);
    expect32("mem_base (strobe)", mem_base, 32'h1000_AB00);
    bus.read(REG_OUTWIDTH, d, resp); expect32("read outwidth", d, 44);
    bus.read(REG_CYCLES, d, resp);   expect32("read cycles", d, 1234);
    for (int k = 0; k < 4*TAPS; k++) begin
      cval[k] = $urandom;
      bus.write(REG_COEFF + 12'(4*k), cval[k], resp);
    end
    for (int k = 0; k < 4*TAPS; k++) begin
      expect32("coeff_stage", 32'(coeff_stage[k]), cval[k]);
      bus.read(REG_COEFF + 12'(4*k), d, resp);
      expect32("read coeff", d, cval[k]);
    end
    // start a forward command
    bus.write(REG_CTRL, {29'd0, MODE_FORWARD, 1'b1}, resp);
    repeat (2) @(posedge clk);
    expect32("starts", 32'(starts), 1);
    expect32("mode", 32'(last_mode), 32'(MODE_FORWARD));
    busy = 1;
    bus.read(REG_STATUS, d, resp); expect32("status busy", d, 32'b010);
    bus.write(REG_CTRL, {29'd0, MODE_INVERSE, 1'b1}, resp);   // ignored: busy
    repeat (2) @(posedge clk);
    expect32("start while busy", 32'(starts), 1);
    @(posedge clk); done_pulse <= 1; dma_err <= 1; busy <= 0;
    @(posedge clk); done_pulse <= 0; dma_err <= 0;
    bus.read(REG_STATUS, d, resp); expect32("status done+err", d, 32'b101);
    bus.write(REG_CTRL, {29'd0, MODE_COEFF, 1'b1}, resp);
    repeat (2) @(posedge clk);
    expect32("second start", 32'(starts), 2);
    expect32("coeff mode", 32'(last_mode), 32'(MODE_COEFF));
    bus.read(REG_STATUS, d, resp); expect32("status cleared", d, 0);
    // unmapped
    bus.write(12'h080, 32'h1, resp); expect32("write slverr", 32'(resp), 32'(RESP_SLVERR));
    bus.read(12'h0F0, d, resp);      expect32("read slverr", 32'(resp), 32'(RESP_SLVERR));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
