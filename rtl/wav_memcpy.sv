// wav_memcpy: the wavelet engine's DMA, an AXI4 master that copies a block of
// 32-bit words between shared memory and one of the on-chip row buffers.
//
// The paper builds this from the high-level-synthesis "memcpy" on an AXI4
// master port attached to the processor's accelerator coherence port; the
// copies are not overlapped with filtering.  This module implements the same
// function: a command gives a direction, a byte address and a word count.
//   to_mem = 0: read `words` words at `addr` and write them to buffer words
//               0 .. words-1 (buf_wr_*).
//   to_mem = 1: read buffer words 0 .. words-1 (buf_rd_*, one-cycle read
//               latency) and write them to memory at `addr`.
// The copy is cut into INCR bursts of at most MAX_BURST beats that never cross
// a 4 KiB boundary; one burst is in flight at a time.  Burst length, the single
// outstanding burst and the cache/prot attributes are this design's choices.
// A write path keeps a two-entry prefetch queue so W beats can go out one per
// cycle despite the buffer's read latency.  `done` pulses for one cycle when
// the last data beat (read) or the last write response has arrived; `err`
// reports any non-OKAY response of that copy.
module wav_memcpy
  import fusion_pkg::*;
#(
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned BUF_AW    = 12,   // buffer word-address width
  parameter int unsigned MAX_BURST = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                start,
  input  logic                to_mem,
  input  logic [ADDR_W-1:0]   addr,
  input  logic [BUF_AW-1:0]   words,
  output logic                busy,
  output logic                done,
  output logic                err,
  // buffer side
  output logic                buf_wr_en,
  output logic [BUF_AW-1:0]   buf_wr_addr,
  output data_t               buf_wr_data,
  output logic                buf_rd_en,
  output logic [BUF_AW-1:0]   buf_rd_addr,
  input  data_t               buf_rd_data,
  // AXI4 master: read
  output logic [ADDR_W-1:0]   m_araddr,
  output logic [7:0]          m_arlen,
  output logic [2:0]          m_arsize,
  output logic [1:0]          m_arburst,
  output logic [3:0]          m_arcache,
  output logic [2:0]          m_arprot,
  output logic                m_arvalid,
  input  logic                m_arready,
  input  logic [DATA_W-1:0]   m_rdata,
  input  logic [1:0]          m_rresp,
  input  logic                m_rlast,
  input  logic                m_rvalid,
  output logic                m_rready,
  // AXI4 master: write
  output logic [ADDR_W-1:0]   m_awaddr,
  output logic [7:0]          m_awlen,
  output logic [2:0]          m_awsize,
  output logic [1:0]          m_awburst,
  output logic [3:0]          m_awcache,
  output logic [2:0]          m_awprot,
  output logic                m_awvalid,
  input  logic                m_awready,
  output logic [DATA_W-1:0]   m_wdata,
  output logic [DATA_W/8-1:0] m_wstrb,
  output logic                m_wlast,
  output logic                m_wvalid,
  input  logic                m_wready,
  input  logic [1:0]          m_bresp,
  input  logic                m_bvalid,
  output logic                m_bready
);
  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_AW, S_W, S_B} state_e;
  state_e state;

  logic [ADDR_W-1:0] cur_addr;      // byte address of the next burst
  logic [BUF_AW-1:0] remain;        // words not yet covered by a burst
  logic [BUF_AW-1:0] buf_ptr;       // buffer word of the next data beat
  logic [8:0]        beats;         // beats in the current burst
  logic [8:0]        beat_cnt;      // beats of the current burst transferred
  logic              dir_wr;

  // Beats of the next burst: limited by MAX_BURST, the words left and the
  // distance to the next 4 KiB boundary.
  logic [10:0] to_4k;
  logic [8:0]  nxt_beats;
  always_comb begin
    to_4k = 11'((13'h1000 - {1'b0, cur_addr[11:0]}) >> 2);
    nxt_beats = 9'(MAX_BURST);
    if (remain < BUF_AW'(MAX_BURST)) nxt_beats = 9'(remain);
    if (11'(nxt_beats) > to_4k) nxt_beats = 9'(to_4k);
  end

  // ---------------- write-data prefetch queue ----------------
  logic [BUF_AW-1:0] fetch_ptr;     // next buffer word to fetch
  logic [BUF_AW-1:0] fetch_end;     // words to fetch in total
  logic              inflight;      // a buffer read returns this cycle
  data_t             q_data [2];
  logic [1:0]        q_cnt;
  logic              q_pop, q_push, fetch;

  assign q_pop  = m_wvalid && m_wready;
  assign q_push = inflight;
  assign fetch  = dir_wr && (state != S_IDLE) && (fetch_ptr != fetch_end) &&
                  (2'(q_cnt) + 2'(inflight) - 2'(q_pop) < 2'd2);
  assign buf_rd_en   = fetch;
  assign buf_rd_addr = fetch_ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt     <= '0;
      inflight  <= 1'b0;
      fetch_ptr <= '0;
      q_data[0] <= '0;
      q_data[1] <= '0;
    end else begin
      inflight <= fetch;
      if (fetch) fetch_ptr <= fetch_ptr + 1'b1;
      if (start && !busy) fetch_ptr <= '0;
      // queue: slot 0 is the head
      unique case ({q_push, q_pop})
        2'b10: begin
          q_data[q_cnt[0]] <= buf_rd_data;
          q_cnt <= q_cnt + 1'b1;
        end
        2'b01: begin
          q_data[0] <= q_data[1];
          q_cnt <= q_cnt - 1'b1;
        end
        2'b11: begin
          if (q_cnt == 2'd1) q_data[0] <= buf_rd_data;
          else begin
            q_data[0] <= q_data[1];
            q_data[1] <= buf_rd_data;
          end
        end
        default: ;
      endcase
    end
  end

  // ---------------- burst sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur_addr <= '0;
      remain   <= '0;
      buf_ptr  <= '0;
      beats    <= '0;
      beat_cnt <= '0;
      dir_wr   <= 1'b0;
      done     <= 1'b0;
      err      <= 1'b0;
      fetch_end <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cur_addr  <= addr;
          remain    <= words;
          buf_ptr   <= '0;
          dir_wr    <= to_mem;
          fetch_end <= words;
          err       <= 1'b0;
          if (words == '0) done <= 1'b1;
          else state <= to_mem ? S_AW : S_AR;
        end
        S_AR: if (m_arready) begin
          state    <= S_R;
          beat_cnt <= '0;
        end
        S_R: if (m_rvalid) begin
          beat_cnt <= beat_cnt + 1'b1;
          buf_ptr  <= buf_ptr + 1'b1;
          if (m_rresp != RESP_OKAY) err <= 1'b1;
          if (beat_cnt + 1'b1 == beats) begin
            if (remain == '0) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else state <= S_AR;
          end
        end
        S_AW: if (m_awready) begin
          state    <= S_W;
          beat_cnt <= '0;
        end
        S_W: if (q_pop) begin
          beat_cnt <= beat_cnt + 1'b1;
          if (beat_cnt + 1'b1 == beats) state <= S_B;
        end
        S_B: if (m_bvalid) begin
          if (m_bresp != RESP_OKAY) err <= 1'b1;
          if (remain == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_AW;
        end
        default: state <= S_IDLE;
      endcase
      if ((state == S_AR && m_arready) || (state == S_AW && m_awready)) begin
        beats    <= nxt_beats;
        cur_addr <= cur_addr + ADDR_W'({nxt_beats, 2'b00});
        remain   <= remain - BUF_AW'(nxt_beats);
      end
    end
  end

  assign busy      = (state != S_IDLE);

  // read channel
  assign m_araddr  = cur_addr;
  assign m_arlen   = 8'(nxt_beats - 1'b1);
  assign m_arsize  = 3'b010;
  assign m_arburst = 2'b01;
  assign m_arcache = 4'b1111;   // cacheable, allocate: coherent access
  assign m_arprot  = 3'b000;
  assign m_arvalid = (state == S_AR);
  assign m_rready  = (state == S_R);

  assign buf_wr_en   = (state == S_R) && m_rvalid;
  assign buf_wr_addr = buf_ptr;
  assign buf_wr_data = data_t'(m_rdata);

  // write channel
  assign m_awaddr  = cur_addr;
  assign m_awlen   = 8'(nxt_beats - 1'b1);
  assign m_awsize  = 3'b010;
  assign m_awburst = 2'b01;
  assign m_awcache = 4'b1111;
  assign m_awprot  = 3'b000;
  assign m_awvalid = (state == S_AW);
  assign m_wdata   = q_data[0];
  assign m_wstrb   = '1;
  assign m_wvalid  = (state == S_W) && (q_cnt != 2'd0);
  assign m_wlast   = m_wvalid && (beat_cnt + 1'b1 == beats);
  assign m_bready  = (state == S_B);

  // AXI rule: an address held valid must not change until accepted.
  property p_ar_stable;
    @(posedge clk) disable iff (!rst_n)
      m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen);
  endproperty
  property p_aw_stable;
    @(posedge clk) disable iff (!rst_n)
      m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen);
  endproperty
  property p_w_stable;
    @(posedge clk) disable iff (!rst_n)
      m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata);
  endproperty
  a_ar_stable: assert property (p_ar_stable);
  a_aw_stable: assert property (p_aw_stable);
  a_w_stable:  assert property (p_w_stable);
endmodule
