// tb_axi_ipif: the AXI4-Lite to register-interface bridge against a
// behavioural register file of four words that answers after a random delay
// of 0-5 cycles.  Register 3 is read-only and answers writes with an error.
// Checks: written words (with byte strobes) read back, exactly one chip
// enable per access and it matches the address, SLVERR is passed through,
// and the access takes longer when the register file answers later.
module tb_axi_ipif;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] awaddr, araddr, wstrb;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  logic cs, rnw, rdack = 0, wrack = 0, err = 0;
  logic [3:0] rdce, wrce, be;
  logic [31:0] b2ip, ip2b = 0;

  axil_master #(.AW(4)) bfm (.clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);
  axi_ipif #(.NUM_REGS(4)) dut (.clk, .rst_n, .s_awaddr(awaddr), .s_awvalid(awvalid),
    .s_awready(awready), .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr),
    .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready), .bus2ip_cs(cs), .bus2ip_rdce(rdce),
    .bus2ip_wrce(wrce), .bus2ip_data(b2ip), .bus2ip_be(be), .bus2ip_rnw(rnw),
    .ip2bus_data(ip2b), .ip2bus_rdack(rdack), .ip2bus_wrack(wrack), .ip2bus_error(err));

  // behavioural register file
  logic [31:0] regs [4];
  int delay = 0, wait_n = 0, bad_ce = 0, accesses = 0;
  bit busy = 0;
  initial begin
    regs[0] = 0; regs[1] = 0; regs[2] = 0; regs[3] = 32'hC0DE_0003;
  end
  function automatic int idx(input logic [3:0] ce);
    for (int i = 0; i < 4; i++) if (ce == 4'(1 << i)) return i;
    return -1;
  endfunction
  always @(posedge clk) begin
    rdack <= 0; wrack <= 0; err <= 0;
    if (cs && !busy && !rdack && !wrack) begin
      busy <= 1; wait_n <= delay; accesses++;
      if (idx(rdce | wrce) < 0 || (rdce != 0 && wrce != 0) || rnw != (rdce != 0)) bad_ce++;
    end
    if (busy) begin
      if (wait_n > 0) wait_n <= wait_n - 1;
      else begin
        int i;
        i = idx(rdce | wrce);
        busy <= 0;
        if (i >= 0) begin
          if (rnw) begin rdack <= 1; ip2b <= regs[i]; end
          else begin
            wrack <= 1;
            if (i == 3) err <= 1;
            else for (int b = 0; b < 4; b++) if (be[b]) regs[i][8*b +: 8] <= b2ip[8*b +: 8];
          end
        end
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [1:0] resp;
    logic [31:0] d;
    logic [31:0] model [4];
    int fast;
    repeat (3) @(posedge clk);
    rst_n = 1;
    model[0] = 0; model[1] = 0; model[2] = 0; model[3] = 32'hC0DE_0003;
    for (int n = 0; n < 40; n++) begin
      int r;
      logic [31:0] v;
      logic [3:0] s;
      r = $urandom_range(0, 3); v = $urandom; s = 4'($urandom_range(1, 15));
      delay = $urandom_range(0, 5);
      if ($urandom_range(0, 1)) begin
        bfm.write(4'(r * 4), v, resp, s);
        check(resp == ((r == 3) ? 2'b10 : 2'b00), $sformatf("write %0d resp %0d", r, resp));
        if (r != 3) for (int b = 0; b < 4; b++) if (s[b]) model[r][8*b +: 8] = v[8*b +: 8];
      end else begin
        bfm.read(4'(r * 4), d, resp);
        check(resp == 0 && d == model[r], $sformatf("read %0d: %h want %h", r, d, model[r]));
      end
    end
    delay = 0; bfm.read(4'h0, d, resp); fast = bfm.cycles;
    delay = 5; bfm.read(4'h0, d, resp);
    check(bfm.cycles == fast + 5, $sformatf("wait states not honoured: %0d vs %0d", bfm.cycles, fast));
    check(bad_ce == 0 && accesses == 42, $sformatf("bad chip enables %0d, accesses %0d", bad_ce, accesses));
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
