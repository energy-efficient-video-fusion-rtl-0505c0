// tb_axi_control_logic: plays the register interface (chip enables held until
// the acknowledge, as axi_ipif does) against the control logic and a
// behavioural frame store.  Checks: register reads acknowledged in one
// cycle, a DATA read pops exactly one pixel (rden, then capture, then the
// acknowledge), a DATA read on an empty store is refused with an error and
// pops nothing, a CTRL write strobes wr_ctrl, other writes give an error.
module tb_axi_control_logic;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cs = 0, rdack, wrack, err, rden, frame_empty = 1, wr_ctrl, capture;
  logic [3:0] rdce = 0, wrce = 0;

  axi_control_logic dut (.clk, .rst_n, .bus2ip_cs(cs), .bus2ip_rdce(rdce), .bus2ip_wrce(wrce),
    .ip2bus_rdack(rdack), .ip2bus_wrack(wrack), .ip2bus_error(err), .rden, .frame_empty,
    .wr_ctrl, .capture);

  int pops = 0, caps = 0, ctrl_wr = 0, last_rden = -10, last_cap = -10, now = 0;
  bit order_bad = 0;
  always @(posedge clk) begin
    now++;
    if (rden) begin pops++; last_rden = now; end
    if (capture) begin
      caps++; last_cap = now;
      if (now != last_rden + 1) order_bad = 1;
    end
    if (wr_ctrl) ctrl_wr++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one access: returns cycles until acknowledge and the error bit
  task automatic access(input bit rd, input int r, output int cyc, output logic e);
    @(negedge clk);
    cs = 1;
    if (rd) rdce = 4'(1 << r); else wrce = 4'(1 << r);
    cyc = 0;
    do begin @(negedge clk); cyc++; end while (!(rdack || wrack) && cyc < 20);
    e = err;
    check(rd ? rdack : wrack, "wrong acknowledge");
    cs = 0; rdce = 0; wrce = 0;
  endtask

  initial begin
    int cyc;
    logic e;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) if (r != 2) begin
      access(1, r, cyc, e); check(cyc == 1 && !e, $sformatf("read reg %0d: %0d cycles", r, cyc));
    end
    access(1, 2, cyc, e); check(e && pops == 0, "empty DATA read not refused");
    frame_empty = 0;
    for (int n = 1; n <= 5; n++) begin
      access(1, 2, cyc, e);
      check(!e && cyc == 3 && pops == n && caps == n, $sformatf("DATA read %0d: %0d cycles", n, cyc));
    end
    check(!order_bad, "capture not one cycle after rden");
    access(0, 0, cyc, e);
    @(negedge clk);
    check(!e && ctrl_wr == 1, "CTRL write");
    for (int r = 1; r < 4; r++) begin
      access(0, r, cyc, e); check(e && ctrl_wr == 1, $sformatf("write to reg %0d not refused", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
