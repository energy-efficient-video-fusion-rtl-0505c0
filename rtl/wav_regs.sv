// wav_regs: AXI4-Lite slave of the wavelet engine.
//
// The processor uses this port to stage filter coefficients and to issue
// commands (the paper: an AXI4-Lite slave "used to load filter coefficients and
// send commands to the engine").  The register map is this design's own (see
// fusion_pkg):
//   CTRL      write: [0] start, [2:1] mode.  Writing start=1 issues one command
//             (a single-cycle `cmd_start` pulse) unless the engine is busy.
//   STATUS    read:  [0] done (set when a command finishes, cleared by the next
//             start), [1] busy, [2] bus error seen by the DMA in that command.
//   IN_OFF, OUT_OFF  word offsets of the input and output rows in memory.
//   OUTWIDTH  number of output pairs per row.
//   MEM_BASE  byte address of the shared memory region.
//   CYCLES    read: clock cycles the last command took.
//   COEFF     48 words: forward high-pass, forward low-pass, inverse even-phase,
//             inverse odd-phase taps, 12 each.  They are only staged here; the
//             coefficient-loading command copies them into the filter banks.
// Protocol: a write is accepted when address and data are both valid; the
// response follows one cycle later.  A read answers one cycle after the
// address.  Unmapped addresses answer SLVERR.
module wav_regs
  import fusion_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  // to / from the engine
  output logic        cmd_start,
  output wav_mode_e   cmd_mode,
  output logic [31:0] in_off,
  output logic [31:0] out_off,
  output logic [31:0] outwidth,
  output logic [31:0] mem_base,
  output data_t       coeff_stage [4*TAPS],
  input  logic        busy,
  input  logic        done_pulse,
  input  logic        dma_err,
  input  logic [31:0] cycles
);
  logic done_flag, err_flag;

  // ---------------- write channel ----------------
  logic wr_fire;
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;

  logic wr_hit;
  logic [5:0] widx, ridx;   // coefficient index of a write / read address
  assign widx = 6'((s_awaddr - REG_COEFF) >> 2);
  assign ridx = 6'((s_araddr - REG_COEFF) >> 2);
  always_comb begin
    wr_hit = 1'b1;
    unique case (s_awaddr)
      REG_CTRL, REG_IN_OFF, REG_OUT_OFF, REG_OUTWIDTH, REG_MEM_BASE: ;
      default: wr_hit = (s_awaddr >= REG_COEFF) && (s_awaddr < REG_COEFF + 12'(16*TAPS))
                        && (s_awaddr[1:0] == 2'b00);
    endcase
  end

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw,
                                        input logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = nw[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid  <= 1'b0;
      s_bresp   <= RESP_OKAY;
      cmd_start <= 1'b0;
      cmd_mode  <= MODE_IDLE;
      in_off    <= '0;
      out_off   <= '0;
      outwidth  <= '0;
      mem_base  <= '0;
      for (int k = 0; k < 4*TAPS; k++) coeff_stage[k] <= '0;
    end else begin
      cmd_start <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        s_bresp  <= wr_hit ? RESP_OKAY : RESP_SLVERR;
        unique case (s_awaddr)
          REG_CTRL: begin
            cmd_mode <= wav_mode_e'(s_wdata[2:1]);
            if (s_wstrb[0] && s_wdata[0] && !busy) cmd_start <= 1'b1;
          end
          REG_IN_OFF:   in_off   <= merge(in_off,   s_wdata, s_wstrb);
          REG_OUT_OFF:  out_off  <= merge(out_off,  s_wdata, s_wstrb);
          REG_OUTWIDTH: outwidth <= merge(outwidth, s_wdata, s_wstrb);
          REG_MEM_BASE: mem_base <= merge(mem_base, s_wdata, s_wstrb);
          default:
            if (wr_hit) begin
              coeff_stage[widx] <= merge(coeff_stage[widx], s_wdata, s_wstrb);
            end
        endcase
      end
    end
  end

  // done / error flags
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_flag <= 1'b0;
      err_flag  <= 1'b0;
    end else if (cmd_start) begin
      done_flag <= 1'b0;
      err_flag  <= 1'b0;
    end else begin
      if (done_pulse) done_flag <= 1'b1;
      if (dma_err)    err_flag  <= 1'b1;
    end
  end

  // ---------------- read channel ----------------
  assign s_arready = s_arvalid && !s_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      s_rresp  <= RESP_OKAY;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arready) begin
        s_rvalid <= 1'b1;
        s_rresp  <= RESP_OKAY;
        unique case (s_araddr)
          REG_CTRL:     s_rdata <= {29'd0, cmd_mode, 1'b0};
          REG_STATUS:   s_rdata <= {29'd0, err_flag, busy, done_flag};
          REG_IN_OFF:   s_rdata <= in_off;
          REG_OUT_OFF:  s_rdata <= out_off;
          REG_OUTWIDTH: s_rdata <= outwidth;
          REG_MEM_BASE: s_rdata <= mem_base;
          REG_CYCLES:   s_rdata <= cycles;
          default:
            if ((s_araddr >= REG_COEFF) && (s_araddr < REG_COEFF + 12'(16*TAPS))
                && (s_araddr[1:0] == 2'b00)) begin
              s_rdata <= coeff_stage[ridx];
            end else begin
              s_rdata <= '0;
              s_rresp <= RESP_SLVERR;
            end
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
