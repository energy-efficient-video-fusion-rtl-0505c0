// slave_register: the camera wrapper's register file.
//
//   reg 0 CTRL    read/write, byte-enabled: [0] capture enable of the frame store.
//   reg 1 STATUS  read only: [0] frame ready (a whole frame waits in the store).
//   reg 2 DATA    read only: the last pixel taken from the store (Data[7:0]);
//                 `capture` loads it from the store's output.
//   reg 3 PIXCNT  read only: pixels taken since CTRL was last written.
// `rd_sel` (one-hot) picks the register shown on `rd_data`.  Write and capture
// strobes come from axi_control_logic.  The paper names the block and shows
// Data[7:0] entering it; the register layout is this design's own.
module slave_register (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_ctrl,
  input  logic [31:0] wdata,
  input  logic [3:0]  be,
  input  logic        capture,
  input  logic [7:0]  din,
  input  logic        frame_empty,
  input  logic [3:0]  rd_sel,
  output logic [31:0] rd_data,
  output logic        capture_en
);
  logic [31:0] ctrl_reg;
  logic [7:0]  data_reg;
  logic [31:0] pix_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_reg <= '0;
      data_reg <= '0;
      pix_cnt  <= '0;
    end else begin
      if (wr_ctrl) begin
        for (int b = 0; b < 4; b++) if (be[b]) ctrl_reg[8*b +: 8] <= wdata[8*b +: 8];
        pix_cnt <= '0;
      end
      if (capture) begin
        data_reg <= din;
        pix_cnt  <= pix_cnt + 1'b1;
      end
    end
  end

  assign capture_en = ctrl_reg[0];

  always_comb begin
    unique case (1'b1)
      rd_sel[0]: rd_data = ctrl_reg;
      rd_sel[1]: rd_data = {31'd0, !frame_empty};
      rd_sel[2]: rd_data = {24'd0, data_reg};
      rd_sel[3]: rd_data = pix_cnt;
      default:   rd_data = '0;
    endcase
  end
endmodule
