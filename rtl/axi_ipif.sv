// axi_ipif: AXI4-Lite slave that presents each register access to user logic
// as a simple chip-select / chip-enable handshake (the "IPIC" bus drawn in the
// paper's camera wrapper: Chip Select, Read CE, Write CE, Write Data,
// Qualifiers, Read Data, IP Status).
//
// One access at a time.  A read address, or a write address together with its
// data, is latched; then bus2ip_cs and the chip enable of register
// addr[3:2] (one-hot, NUM_REGS of them) stay high until the user logic answers
// with ip2bus_rdack / ip2bus_wrack (IP status), optionally with ip2bus_error.
// The answer becomes the AXI read or write response.  Qualifiers are the byte
// enables and read-not-write.  Reads win over writes when both arrive together.
// The paper only names this block; the handshake is modelled on the usual
// register-interface convention and is this design's own.
module axi_ipif
  import fusion_pkg::*;
#(
  parameter int unsigned NUM_REGS = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave
  input  logic [3:0]          s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [31:0]         s_wdata,
  input  logic [3:0]          s_wstrb,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [3:0]          s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  // register interface
  output logic                bus2ip_cs,
  output logic [NUM_REGS-1:0] bus2ip_rdce,
  output logic [NUM_REGS-1:0] bus2ip_wrce,
  output logic [31:0]         bus2ip_data,
  output logic [3:0]          bus2ip_be,
  output logic                bus2ip_rnw,
  input  logic [31:0]         ip2bus_data,
  input  logic                ip2bus_rdack,
  input  logic                ip2bus_wrack,
  input  logic                ip2bus_error
);
  typedef enum logic [2:0] {I_IDLE, I_RD, I_RRESP, I_WR, I_BRESP} istate_e;
  istate_e state;
  logic [NUM_REGS-1:0] ce;

  assign s_arready = (state == I_IDLE) && s_arvalid;
  assign s_awready = (state == I_IDLE) && !s_arvalid && s_awvalid && s_wvalid;
  assign s_wready  = s_awready;
  assign s_rvalid  = (state == I_RRESP);
  assign s_bvalid  = (state == I_BRESP);

  assign bus2ip_cs   = (state == I_RD) || (state == I_WR);
  assign bus2ip_rdce = (state == I_RD) ? ce : '0;
  assign bus2ip_wrce = (state == I_WR) ? ce : '0;

  // chip enable of the register at word address a[3:2]
  function automatic logic [NUM_REGS-1:0] onehot(input logic [3:0] a);
    onehot = '0;
    for (int r = 0; r < NUM_REGS; r++) if (32'(a[3:2]) == r) onehot[r] = 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= I_IDLE;
      ce          <= '0;
      bus2ip_data <= '0;
      bus2ip_be   <= '0;
      bus2ip_rnw  <= 1'b1;
      s_rdata     <= '0;
      s_rresp     <= RESP_OKAY;
      s_bresp     <= RESP_OKAY;
    end else begin
      unique case (state)
        I_IDLE:
          if (s_arready) begin
            ce         <= onehot(s_araddr);
            bus2ip_rnw <= 1'b1;
            bus2ip_be  <= '1;
            state      <= I_RD;
          end else if (s_awready) begin
            ce          <= onehot(s_awaddr);
            bus2ip_rnw  <= 1'b0;
            bus2ip_data <= s_wdata;
            bus2ip_be   <= s_wstrb;
            state       <= I_WR;
          end
        I_RD: if (ip2bus_rdack) begin
          s_rdata <= ip2bus_data;
          s_rresp <= ip2bus_error ? RESP_SLVERR : RESP_OKAY;
          state   <= I_RRESP;
        end
        I_RRESP: if (s_rready) state <= I_IDLE;
        I_WR: if (ip2bus_wrack) begin
          s_bresp <= ip2bus_error ? RESP_SLVERR : RESP_OKAY;
          state   <= I_BRESP;
        end
        I_BRESP: if (s_bready) state <= I_IDLE;
        default: state <= I_IDLE;
      endcase
    end
  end

  a_one_ce: assert property (@(posedge clk) disable iff (!rst_n)
                             bus2ip_cs |-> $onehot(bus2ip_rdce | bus2ip_wrce));
endmodule
