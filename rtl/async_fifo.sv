// async_fifo: dual-clock first-in first-out queue used to carry video samples
// from the camera clock into the system clock.
//
// Classic Gray-code design: each side keeps a binary pointer one bit wider than
// the address, publishes it in Gray code, and synchronizes the other side's
// Gray pointer through two flip-flops.  `full` and `empty` are therefore
// conservative (they may lag by the synchronizer delay, never lead).  The read
// port is first-word-fall-through: rdata shows the head entry while !empty and
// `rd_en` removes it.  Writes to a full queue and reads from an empty one are
// ignored.  Depth is 2**AW entries.
module async_fifo #(
  parameter int unsigned W  = 18,
  parameter int unsigned AW = 10
) (
  input  logic         wclk,
  input  logic         wrst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wdata,
  output logic         full,
  input  logic         rclk,
  input  logic         rrst_n,
  input  logic         rd_en,
  output logic [W-1:0] rdata,
  output logic         empty
);
  logic [W-1:0] mem [2**AW];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1, wq2;   // read pointer seen in the write domain
  logic [AW:0] rq1, rq2;   // write pointer seen in the read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  logic [AW:0] wbin_nxt;
  assign wbin_nxt = wbin + (AW+1)'(wr_en && !full);
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin  <= '0;
      wgray <= '0;
      wq1   <= '0;
      wq2   <= '0;
    end else begin
      wbin  <= wbin_nxt;
      wgray <= bin2gray(wbin_nxt);
      wq1   <= rgray;
      wq2   <= wq1;
    end
  end
  always_ff @(posedge wclk) if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  assign full = (wgray == {~wq2[AW:AW-1], wq2[AW-2:0]});

  // read side
  logic [AW:0] rbin_nxt;
  assign rbin_nxt = rbin + (AW+1)'(rd_en && !empty);
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin  <= '0;
      rgray <= '0;
      rq1   <= '0;
      rq2   <= '0;
    end else begin
      rbin  <= rbin_nxt;
      rgray <= bin2gray(rbin_nxt);
      rq1   <= wgray;
      rq2   <= rq1;
    end
  end
  assign empty = (rgray == rq2);
  assign rdata = mem[rbin[AW-1:0]];
endmodule
