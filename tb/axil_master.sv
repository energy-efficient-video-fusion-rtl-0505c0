// axil_master: AXI4-Lite master for testbenches, standing in for the
// processor's general-purpose port.  Tasks: write(addr, data, resp) and
// read(addr, data, resp).  Signals are driven on the falling clock edge and
// handshakes are recorded on the rising edge by counters, so the tasks never
// race the design.  `cycles` holds the clock cycles of the last access.
module axil_master #(
  parameter int unsigned AW = 12
) (
  input  logic          clk,
  output logic [AW-1:0] awaddr,
  output logic          awvalid,
  input  logic          awready,
  output logic [31:0]   wdata,
  output logic [3:0]    wstrb,
  output logic          wvalid,
  input  logic          wready,
  input  logic [1:0]    bresp,
  input  logic          bvalid,
  output logic          bready,
  output logic [AW-1:0] araddr,
  output logic          arvalid,
  input  logic          arready,
  input  logic [31:0]   rdata,
  input  logic [1:0]    rresp,
  input  logic          rvalid,
  output logic          rready
);
  int cycles, now = 0;
  int aw_n = 0, w_n = 0, b_n = 0, ar_n = 0, r_n = 0;
  logic [1:0]  b_resp, r_resp;
  logic [31:0] r_data;
  initial begin
    awaddr = 0; awvalid = 0; wdata = 0; wstrb = 0; wvalid = 0; bready = 0;
    araddr = 0; arvalid = 0; rready = 0;
    b_resp = 0; r_resp = 0; r_data = 0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (awvalid && awready) aw_n <= aw_n + 1;
    if (wvalid && wready) w_n <= w_n + 1;
    if (bvalid && bready) begin b_n <= b_n + 1; b_resp <= bresp; end
    if (arvalid && arready) ar_n <= ar_n + 1;
    if (rvalid && rready) begin r_n <= r_n + 1; r_resp <= rresp; r_data <= rdata; end
  end

  task automatic write(input logic [AW-1:0] a, input logic [31:0] d, output logic [1:0] resp,
                       input logic [3:0] be = 4'hF);
    int aw0 = aw_n, w0 = w_n, b0 = b_n, t0;
    @(negedge clk);
    t0 = now;
    awaddr = a; awvalid = 1; wdata = d; wstrb = be; wvalid = 1; bready = 1;
    fork
      begin wait (aw_n != aw0); @(negedge clk); awvalid = 0; end
      begin wait (w_n != w0);   @(negedge clk); wvalid = 0; end
    join
    wait (b_n != b0);
    @(negedge clk);
    bready = 0;
    resp = b_resp;
    cycles = now - t0;
  endtask

  task automatic read(input logic [AW-1:0] a, output logic [31:0] d, output logic [1:0] resp);
    int ar0 = ar_n, r0 = r_n, t0;
    @(negedge clk);
    t0 = now;
    araddr = a; arvalid = 1; rready = 1;
    wait (ar_n != ar0);
    @(negedge clk);
    arvalid = 0;
    wait (r_n != r0);
    @(negedge clk);
    rready = 0;
    d = r_data;
    resp = r_resp;
    cycles = now - t0;
  endtask
endmodule
