// axi_mem_model: behavioural model of the shared memory seen through the
// processor's accelerator port, for testbenches only.  An AXI4 slave with
// 32-bit data holding WORDS words from byte address BASE; INCR bursts, one
// transaction per channel at a time.  With STALL=1 it inserts random wait
// states on every handshake and counts them in `stalls`.  Accesses outside
// the memory answer SLVERR.  Testbenches read and write `mem` directly.
module axi_mem_model #(
  parameter int unsigned WORDS = 4096,
  parameter logic [31:0] BASE  = 32'h1000_0000,
  parameter bit          STALL = 1
) (
  input  logic        clk,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready
);
  logic [31:0] mem [WORDS];
  int stalls = 0, rd_bursts = 0, wr_bursts = 0, wlast_err = 0;

  function automatic bit in_range(input logic [31:0] a);
    return a >= BASE && a < BASE + 4*WORDS;
  endfunction
  function automatic bit coin();
    return STALL && ($urandom_range(0, 3) == 0);
  endfunction

  // read channel
  logic        r_busy;
  logic [31:0] r_addr;
  logic [8:0]  r_left;
  initial begin
    arready = 0; rvalid = 0; rlast = 0; rdata = 0; rresp = 0; r_busy = 0;
    awready = 0; wready = 0; bvalid = 0; bresp = 0;
  end
  always @(posedge clk) begin
    arready <= 1'b0;
    if (!r_busy && arvalid && !arready) begin
      if (coin()) stalls++;
      else begin
        arready <= 1'b1;
        r_busy  <= 1'b1;
        r_addr  <= araddr;
        r_left  <= 9'(arlen) + 1;
        rd_bursts++;
      end
    end
    if (rvalid && rready) begin
      rvalid <= 1'b0;
      if (rlast) r_busy <= 1'b0;
    end
    if (r_busy && !arready && (!rvalid || rready) && r_left != 0) begin
      if (coin()) begin
        stalls++;
        rvalid <= 1'b0;
      end else begin
        rvalid <= 1'b1;
        rdata  <= in_range(r_addr) ? mem[(r_addr - BASE) >> 2] : 32'hDEAD_BEEF;
        rresp  <= in_range(r_addr) ? 2'b00 : 2'b10;
        rlast  <= (r_left == 1);
        r_addr <= r_addr + 4;
        r_left <= r_left - 1;
      end
    end
  end

  // write channel
  logic        w_busy, w_resp;
  logic [31:0] w_addr;
  logic [8:0]  w_left;
  logic        w_err;
  initial begin w_busy = 0; w_resp = 0; w_err = 0; end
  always @(posedge clk) begin
    awready <= 1'b0;
    if (!w_busy && awvalid && !awready) begin
      if (coin()) stalls++;
      else begin
        awready <= 1'b1;
        w_busy  <= 1'b1;
        w_addr  <= awaddr;
        w_left  <= 9'(awlen) + 1;
        w_err   <= 1'b0;
        wr_bursts++;
      end
    end
    wready <= 1'b0;
    if (w_busy && !w_resp && !awready && w_left != 0 && !(wvalid && wready)) begin
      if (coin()) stalls++;
      else wready <= 1'b1;
    end
    if (wvalid && wready) begin
      if (in_range(w_addr)) mem[(w_addr - BASE) >> 2] <= wdata;
      else w_err <= 1'b1;
      if (wlast != (w_left == 1)) wlast_err++;
      w_addr <= w_addr + 4;
      w_left <= w_left - 1;
      if (w_left == 1) w_resp <= 1'b1;
    end
    if (w_resp && !bvalid) begin
      bvalid <= 1'b1;
      bresp  <= (w_err || (wvalid && wready && !in_range(w_addr))) ? 2'b10 : 2'b00;
    end
    if (bvalid && bready) begin
      bvalid <= 1'b0;
      w_resp <= 1'b0;
      w_busy <= 1'b0;
    end
  end
endmodule
