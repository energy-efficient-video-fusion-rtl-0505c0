// wav_in_buffer: on-chip input row buffer of the wavelet engine (buff_in).
//
// The DMA fills it one 32-bit word per cycle; the filter drains it two words
// (an even/odd sample pair) per cycle.  To give the filter both words of a pair
// in one access, the buffer is split into two banks by the word address's
// lowest bit: even words in bank 0, odd words in bank 1, each a simple
// dual-port RAM (one write, one read port) that maps onto block RAM.
//
// Size: WORDS = 2048 + 12 words, enough for a row of 2048 samples plus the 12
// extra samples the filter reads (the paper sizes its buffers for image rows up
// to 2048 pixels).  The bank split is this design's choice.
//
// Timing: writes take effect at the clock edge; a pair read returns its data
// one cycle after rd_en (registered read, block-RAM style).
module wav_in_buffer
  import fusion_pkg::*;
#(
  parameter int unsigned WORDS = 2048 + TAPS
) (
  input  logic  clk,
  // word write port (DMA side)
  input  logic  wr_en,
  input  logic [$clog2(WORDS)-1:0] wr_addr,
  input  data_t wr_data,
  // pair read port (filter side): words 2*rd_idx and 2*rd_idx+1
  input  logic  rd_en,
  input  logic [$clog2(WORDS)-2:0] rd_idx,
  output data_t rd_even,
  output data_t rd_odd
);
  localparam int unsigned BANK = (WORDS + 1) / 2;

  data_t bank0 [BANK];
  data_t bank1 [BANK];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_addr[0]) bank0[wr_addr[$bits(wr_addr)-1:1]] <= wr_data;
    if (wr_en &&  wr_addr[0]) bank1[wr_addr[$bits(wr_addr)-1:1]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_even <= bank0[rd_idx];
      rd_odd  <= bank1[rd_idx];
    end
  end
endmodule
