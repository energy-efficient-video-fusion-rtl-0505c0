// output_fifo: whole-frame store between the video scaler (system clock) and
// the processor's register interface (AXI clock).
//
// The paper stores each scaled frame in an output FIFO "waiting to be taken
// for decomposition" and lets a new frame in only after the previous one has
// been taken.  This module does exactly that with one frame of storage:
//   write side: when `enable` is set and the store is free, the next frame
//   (a beat with user=1) is written, one luma byte per beat (data[7:0]; the
//   thermal picture is monochrome), until FRAME_PIXELS bytes are in.  Then the
//   store is full and every beat is accepted and discarded until the reader has
//   taken the frame; each frame discarded this way counts in `frames_dropped`.
//   A user=1 beat in the middle of a frame restarts the frame.
//   read side: `empty` is low while a complete frame is waiting; each `rden`
//   returns the next byte on `dout` one cycle later (block-RAM style).  Reading
//   byte FRAME_PIXELS-1 frees the store.
// The write side never stalls the stream (s_ready is always 1), so a live
// camera is never held up.  Frame-complete and frame-taken events cross the
// clock domains as toggles through two-flop synchronizers.  Port names follow
// the paper's diagram (rst, wrclk, rdclk, wren, rden); wren is s_valid.
module output_fifo #(
  parameter int unsigned FRAME_PIXELS = 640 * 480
) (
  input  logic        rst,          // active high, asynchronous
  // write side
  input  logic        wrclk,
  input  logic        enable,       // capture enable (any clock; synchronized)
  input  logic [15:0] s_data,
  input  logic        wren,         // s_valid
  output logic        s_ready,
  input  logic        s_user,
  input  logic        s_last,
  output logic [15:0] frames_stored,
  output logic [15:0] frames_dropped,
  // read side
  input  logic        rdclk,
  input  logic        rden,
  output logic [7:0]  dout,
  output logic        empty
);
  localparam int unsigned AW = $clog2(FRAME_PIXELS);

  logic [7:0] mem [FRAME_PIXELS];

  // ---------------- write side ----------------
  logic [AW-1:0] waddr;
  logic          storing, wr_tog, rd_tog_s1, rd_tog_s2, en_s1, en_s2, full;
  logic [AW-1:0] raddr;
  logic          rd_tog, wr_tog_s1, wr_tog_s2;

  assign s_ready = 1'b1;
  assign full    = (wr_tog != rd_tog_s2);

  always_ff @(posedge wrclk or posedge rst) begin
    if (rst) begin
      waddr          <= '0;
      storing        <= 1'b0;
      wr_tog         <= 1'b0;
      rd_tog_s1      <= 1'b0;
      rd_tog_s2      <= 1'b0;
      en_s1          <= 1'b0;
      en_s2          <= 1'b0;
      frames_stored  <= '0;
      frames_dropped <= '0;
    end else begin
      en_s1 <= enable;
      en_s2 <= en_s1;
      rd_tog_s1 <= rd_tog;
      rd_tog_s2 <= rd_tog_s1;
      if (wren) begin
        if (s_user) begin
          if (en_s2 && !full) begin
            storing <= 1'b1;
            waddr   <= AW'(1);
          end else begin
            storing <= 1'b0;
            if (en_s2) frames_dropped <= frames_dropped + 1'b1;
          end
        end else if (storing) begin
          waddr <= waddr + 1'b1;
          if (waddr == AW'(FRAME_PIXELS - 1)) begin
            storing       <= 1'b0;
            wr_tog        <= !wr_tog;
            frames_stored <= frames_stored + 1'b1;
          end
        end
      end
    end
  end

  logic          wr_mem;
  logic [AW-1:0] wr_at;
  assign wr_mem = wren && ((s_user && en_s2 && !full) || (!s_user && storing));
  assign wr_at  = s_user ? '0 : waddr;

  always_ff @(posedge wrclk) begin
    if (wr_mem) mem[wr_at] <= s_data[7:0];
  end

  // ---------------- read side ----------------

  assign empty = (wr_tog_s2 == rd_tog);

  always_ff @(posedge rdclk or posedge rst) begin
    if (rst) begin
      raddr     <= '0;
      rd_tog    <= 1'b0;
      wr_tog_s1 <= 1'b0;
      wr_tog_s2 <= 1'b0;
    end else begin
      wr_tog_s1 <= wr_tog;
      wr_tog_s2 <= wr_tog_s1;
      if (rden && !empty) begin
        if (raddr == AW'(FRAME_PIXELS - 1)) begin
          raddr  <= '0;
          rd_tog <= !rd_tog;
        end else begin
          raddr <= raddr + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge rdclk) begin
    if (rden && !empty) dout <= mem[raddr];
  end

  // s_last is not needed: frames are counted in pixels.
  logic unused_last;
  assign unused_last = s_last;
endmodule
