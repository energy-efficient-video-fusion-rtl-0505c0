// axi_control_logic: answers the register-interface accesses of axi_ipif for
// the camera wrapper and moves pixels from the frame store to slave_register.
//
// Reads of CTRL, STATUS and PIXCNT are answered in the cycle after the chip
// enable appears.  A read of DATA pops the frame store: cycle 0 pulses `rden`,
// cycle 1 captures the store's output into slave_register, cycle 2 answers
// with it.  Reading DATA while no frame is waiting is answered at once with an
// error and pops nothing.  A write to CTRL is stored and acknowledged; a write
// to any other register is acknowledged with an error.  The paper names this
// block between the register interface and the slave registers; the sequencing
// is this design's own.
module axi_control_logic (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus2ip_cs,
  input  logic [3:0]  bus2ip_rdce,
  input  logic [3:0]  bus2ip_wrce,
  output logic        ip2bus_rdack,
  output logic        ip2bus_wrack,
  output logic        ip2bus_error,
  // frame store
  output logic        rden,
  input  logic        frame_empty,
  // slave_register
  output logic        wr_ctrl,
  output logic        capture
);
  typedef enum logic [1:0] {C_IDLE, C_POP, C_CAP, C_ACK} cstate_e;
  cstate_e state;
  logic    acked;   // an answer was given; wait for the chip enable to drop

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= C_IDLE;
      acked        <= 1'b0;
      ip2bus_rdack <= 1'b0;
      ip2bus_wrack <= 1'b0;
      ip2bus_error <= 1'b0;
      rden         <= 1'b0;
      wr_ctrl      <= 1'b0;
      capture      <= 1'b0;
    end else begin
      ip2bus_rdack <= 1'b0;
      ip2bus_wrack <= 1'b0;
      ip2bus_error <= 1'b0;
      rden         <= 1'b0;
      wr_ctrl      <= 1'b0;
      capture      <= 1'b0;
      if (!bus2ip_cs) acked <= 1'b0;
      unique case (state)
        C_IDLE:
          if (bus2ip_cs && !acked && !ip2bus_rdack && !ip2bus_wrack) begin
            if (bus2ip_rdce[2]) begin
              if (frame_empty) begin
                ip2bus_rdack <= 1'b1;
                ip2bus_error <= 1'b1;
                acked        <= 1'b1;
              end else begin
                rden  <= 1'b1;
                state <= C_POP;
              end
            end else if (bus2ip_rdce != '0) begin
              ip2bus_rdack <= 1'b1;
              acked        <= 1'b1;
            end else if (bus2ip_wrce[0]) begin
              wr_ctrl      <= 1'b1;
              ip2bus_wrack <= 1'b1;
              acked        <= 1'b1;
            end else if (bus2ip_wrce != '0) begin
              ip2bus_wrack <= 1'b1;
              ip2bus_error <= 1'b1;
              acked        <= 1'b1;
            end
          end
        C_POP: begin
          capture <= 1'b1;
          state   <= C_CAP;
        end
        C_CAP: begin
          ip2bus_rdack <= 1'b1;
          acked        <= 1'b1;
          state        <= C_ACK;
        end
        C_ACK: state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
