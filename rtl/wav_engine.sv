// wav_engine: the wavelet hardware, an accelerator that filters one image row
// per command for the forward and inverse dual-tree complex wavelet transform
// while the processor handles everything else (tree traversal, fusion rule).
//
// A command runs three phases one after the other, as in the paper, where the
// synthesized memcpy calls are not overlapped with the filter loop:
//   1. copy 2*OUTWIDTH+12 words from memory (MEM_BASE + 4*IN_OFF) into the
//      input buffer over the AXI4 master (wav_memcpy);
//   2. run the filter loop for OUTWIDTH+6 iterations, one iteration per cycle,
//      reading one sample pair per iteration from the input buffer and writing
//      OUTWIDTH result pairs to the output buffer (wav_filter);
//   3. copy 2*OUTWIDTH words from the output buffer to MEM_BASE + 4*OUT_OFF.
// Three modes, as the paper lists them: coefficient loading (copy the 48
// staged coefficients into the two filter banks, one cycle), forward transform
// (filter with the forward bank) and inverse transform (same loop with the
// inverse bank).  The paper does not show the inverse loop; here the synthesis
// step is written in polyphase form, so the inverse reuses the forward datapath:
// with the low/high-pass rows interleaved in memory, output pair k is the even
// and odd reconstructed sample, each a 12-tap dot product whose taps the
// software arranges from the synthesis filters.
//
// Control is through wav_regs (AXI4-Lite).  A command whose OUTWIDTH is zero or
// larger than MAX_WIDTH/2 completes at once with the error flag set.
// Timing of a transform: DMA-in time + (OUTWIDTH + 6 + 3) cycles + DMA-out time.
module wav_engine
  import fusion_pkg::*;
#(
  parameter int unsigned MAX_WIDTH = 2048,  // longest row (samples) the buffers hold
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave (commands, coefficients)
  input  logic [11:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [11:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // AXI4 master (shared memory through the coherent port)
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]  m_arlen,
  output logic [2:0]  m_arsize,
  output logic [1:0]  m_arburst,
  output logic [3:0]  m_arcache,
  output logic [2:0]  m_arprot,
  output logic        m_arvalid,
  input  logic        m_arready,
  input  logic [31:0] m_rdata,
  input  logic [1:0]  m_rresp,
  input  logic        m_rlast,
  input  logic        m_rvalid,
  output logic        m_rready,
  output logic [ADDR_W-1:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic [3:0]  m_awcache,
  output logic [2:0]  m_awprot,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wlast,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready,
  // completion (level: done flag of the last command)
  output logic        irq_done
);
  localparam int unsigned IN_WORDS  = MAX_WIDTH + TAPS;
  localparam int unsigned BUF_AW    = $clog2(IN_WORDS) + 1;   // holds a word count
  localparam int unsigned MAX_PAIRS = MAX_WIDTH / 2;

  // ---------------- registers ----------------
  logic        cmd_start;
  wav_mode_e   cmd_mode;
  logic [31:0] in_off, out_off, outwidth, mem_base, cycles;
  data_t       coeff_stage [4*TAPS];
  logic        busy, done_pulse, err_pulse;

  wav_regs u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .cmd_start, .cmd_mode, .in_off, .out_off, .outwidth, .mem_base, .coeff_stage,
    .busy, .done_pulse, .dma_err(err_pulse), .cycles
  );

  // ---------------- coefficient banks ----------------
  data_t fwd_a [TAPS], fwd_b [TAPS], inv_a [TAPS], inv_b [TAPS];
  data_t coef_a [TAPS], coef_b [TAPS];
  wav_mode_e run_mode;

  always_comb begin
    for (int j = 0; j < TAPS; j++) begin
      coef_a[j] = (run_mode == MODE_INVERSE) ? inv_a[j] : fwd_a[j];
      coef_b[j] = (run_mode == MODE_INVERSE) ? inv_b[j] : fwd_b[j];
    end
  end

  // ---------------- sequencer ----------------
  typedef enum logic [2:0] {E_IDLE, E_COEFF, E_DMA_IN, E_PROC, E_DMA_OUT} estate_e;
  estate_e state;

  logic [BUF_AW-1:0] pairs;          // OUTWIDTH of the running command
  logic [BUF_AW-1:0] rd_i;           // loop iteration issued to the input buffer
  logic [BUF_AW-1:0] wr_k;           // result pairs written
  logic              dma_start, dma_to_mem, dma_busy, dma_done, dma_err;
  logic [ADDR_W-1:0] dma_addr;
  logic [BUF_AW-1:0] dma_words;
  logic              cmd_err;

  // input-buffer read and filter feed
  logic  ib_rd_en, ib_rd_first, fl_valid, fl_first;
  data_t ib_even, ib_odd;
  logic  fo_valid;
  data_t fo_a, fo_b;

  assign ib_rd_en    = (state == E_PROC) && (rd_i < pairs + BUF_AW'(HALF_TAPS));
  assign ib_rd_first = ib_rd_en && (rd_i == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fl_valid <= 1'b0;
      fl_first <= 1'b0;
    end else begin
      fl_valid <= ib_rd_en;
      fl_first <= ib_rd_first;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= E_IDLE;
      run_mode  <= MODE_IDLE;
      pairs     <= '0;
      rd_i      <= '0;
      wr_k      <= '0;
      dma_start <= 1'b0;
      dma_to_mem <= 1'b0;
      dma_addr  <= '0;
      dma_words <= '0;
      done_pulse <= 1'b0;
      cmd_err   <= 1'b0;
      cycles    <= '0;
      for (int j = 0; j < TAPS; j++) begin
        fwd_a[j] <= '0; fwd_b[j] <= '0; inv_a[j] <= '0; inv_b[j] <= '0;
      end
    end else begin
      dma_start  <= 1'b0;
      done_pulse <= 1'b0;
      cmd_err    <= 1'b0;
      if (state != E_IDLE) cycles <= cycles + 1'b1;
      unique case (state)
        E_IDLE: if (cmd_start) begin
          cycles   <= 32'd1;
          run_mode <= cmd_mode;
          pairs    <= BUF_AW'(outwidth);
          unique case (cmd_mode)
            MODE_COEFF: state <= E_COEFF;
            MODE_FORWARD, MODE_INVERSE:
              if (outwidth == 0 || outwidth > MAX_PAIRS) begin
                cmd_err    <= 1'b1;
                done_pulse <= 1'b1;
              end else begin
                state      <= E_DMA_IN;
                dma_start  <= 1'b1;
                dma_to_mem <= 1'b0;
                dma_addr   <= ADDR_W'(mem_base + (in_off << 2));
                dma_words  <= BUF_AW'({outwidth, 1'b0} + TAPS);
              end
            default: done_pulse <= 1'b1;
          endcase
        end
        E_COEFF: begin
          for (int j = 0; j < TAPS; j++) begin
            fwd_a[j] <= coeff_stage[CG_FWD_HP*TAPS + j];
            fwd_b[j] <= coeff_stage[CG_FWD_LP*TAPS + j];
            inv_a[j] <= coeff_stage[CG_INV_A*TAPS + j];
            inv_b[j] <= coeff_stage[CG_INV_B*TAPS + j];
          end
          done_pulse <= 1'b1;
          state      <= E_IDLE;
        end
        E_DMA_IN: if (dma_done) begin
          state <= E_PROC;
          rd_i  <= '0;
          wr_k  <= '0;
        end
        E_PROC: begin
          if (ib_rd_en) rd_i <= rd_i + 1'b1;
          if (fo_valid) wr_k <= wr_k + 1'b1;
          if (fo_valid && wr_k + 1'b1 == pairs) begin
            state      <= E_DMA_OUT;
            dma_start  <= 1'b1;
            dma_to_mem <= 1'b1;
            dma_addr   <= ADDR_W'(mem_base + (out_off << 2));
            dma_words  <= BUF_AW'({pairs, 1'b0});
          end
        end
        E_DMA_OUT: if (dma_done) begin
          state      <= E_IDLE;
          done_pulse <= 1'b1;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  assign busy      = (state != E_IDLE);
  assign err_pulse = cmd_err || (dma_done && dma_err);

  // irq_done mirrors the done flag
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) irq_done <= 1'b0;
    else if (cmd_start) irq_done <= 1'b0;
    else if (done_pulse) irq_done <= 1'b1;
  end

  // ---------------- buffers ----------------
  logic              dw_en, dr_en;
  logic [BUF_AW-1:0] dw_addr, dr_addr;
  data_t             dw_data, dr_data;

  wav_in_buffer #(.WORDS(IN_WORDS)) u_buff_in (
    .clk,
    .wr_en(dw_en), .wr_addr(dw_addr[$clog2(IN_WORDS)-1:0]), .wr_data(dw_data),
    .rd_en(ib_rd_en), .rd_idx(rd_i[$clog2(IN_WORDS)-2:0]),
    .rd_even(ib_even), .rd_odd(ib_odd)
  );

  wav_out_buffer #(.WORDS(MAX_WIDTH)) u_buff_out (
    .clk,
    .wr_en(fo_valid && state == E_PROC), .wr_idx(wr_k[$clog2(MAX_WIDTH)-2:0]),
    .wr_even(fo_a), .wr_odd(fo_b),
    .rd_en(dr_en), .rd_addr(dr_addr[$clog2(MAX_WIDTH)-1:0]), .rd_data(dr_data)
  );

  // ---------------- filter ----------------
  wav_filter u_filter (
    .clk, .rst_n,
    .in_valid(fl_valid), .first(fl_first), .in_a(ib_even), .in_b(ib_odd),
    .coef_a, .coef_b,
    .out_valid(fo_valid), .out_a(fo_a), .out_b(fo_b)
  );

  // ---------------- DMA ----------------
  wav_memcpy #(.ADDR_W(ADDR_W), .BUF_AW(BUF_AW), .MAX_BURST(MAX_BURST)) u_dma (
    .clk, .rst_n,
    .start(dma_start), .to_mem(dma_to_mem), .addr(dma_addr), .words(dma_words),
    .busy(dma_busy), .done(dma_done), .err(dma_err),
    .buf_wr_en(dw_en), .buf_wr_addr(dw_addr), .buf_wr_data(dw_data),
    .buf_rd_en(dr_en), .buf_rd_addr(dr_addr), .buf_rd_data(dr_data),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arcache, .m_arprot,
    .m_arvalid, .m_arready, .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awcache, .m_awprot,
    .m_awvalid, .m_awready, .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready
  );

  // the DMA is only started from idle
  a_dma_idle: assert property (@(posedge clk) disable iff (!rst_n) dma_start |-> !dma_busy);
endmodule
