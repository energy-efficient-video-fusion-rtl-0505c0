// wav_out_buffer: on-chip output row buffer of the wavelet engine (buff_out).
//
// The filter writes one result pair per cycle (forward transform: high-pass
// coefficient to the even word, low-pass to the odd word, as the reference
// code's buff_out[2k] / buff_out[2k+1]); the DMA reads it back one 32-bit word
// per cycle.  Two banks selected by the word address's lowest bit, each a
// simple dual-port RAM, let both sides run at full rate.
//
// Size: WORDS = 2048 words, enough for image rows up to 2048 samples as the
// paper states; the bank split is this design's choice.
//
// Timing: writes take effect at the clock edge; a word read returns its data
// one cycle after rd_en (registered read).
module wav_out_buffer
  import fusion_pkg::*;
#(
  parameter int unsigned WORDS = 2048
) (
  input  logic  clk,
  // pair write port (filter side): words 2*wr_idx and 2*wr_idx+1
  input  logic  wr_en,
  input  logic [$clog2(WORDS)-2:0] wr_idx,
  input  data_t wr_even,
  input  data_t wr_odd,
  // word read port (DMA side)
  input  logic  rd_en,
  input  logic [$clog2(WORDS)-1:0] rd_addr,
  output data_t rd_data
);
  localparam int unsigned BANK = (WORDS + 1) / 2;

  data_t bank0 [BANK];
  data_t bank1 [BANK];
  data_t q0, q1;
  logic  sel;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      bank0[wr_idx] <= wr_even;
      bank1[wr_idx] <= wr_odd;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      q0  <= bank0[rd_addr[$bits(rd_addr)-1:1]];
      q1  <= bank1[rd_addr[$bits(rd_addr)-1:1]];
      sel <= rd_addr[0];
    end
  end

  assign rd_data = sel ? q1 : q0;
endmodule
