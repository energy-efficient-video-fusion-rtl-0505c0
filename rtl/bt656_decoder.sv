// bt656_decoder: recovers pixels and blanking from an 8-bit ITU-R BT.656
// stream (the thermal camera's digital video output).
//
// BT.656 sends one byte per clock.  Each line carries two timing reference
// codes, FF 00 00 XY, with XY = {1, F, V, H, P3..P0}: H=1 marks end of active
// video (EAV), H=0 start of active video (SAV), V=1 vertical blanking, F the
// field.  Between SAV and the next EAV come Cb Y Cr Y ... bytes.  The decoder
// looks for FF 00 00 in a four-byte window, checks the XY protection bits
// (P3 = V^H, P2 = F^H, P1 = F^V, P0 = F^V^H; a code that fails is ignored and
// counted in `code_err`), removes the four code bytes from the stream and
// updates hblank / vblank / field.  In active video (H=0 and V=0) it joins each
// chroma byte with the following luma byte into one 16-bit YUV 4:2:2 sample:
// data = {C, Y}, with `valid` high for that cycle.
//
// Interface as drawn in the paper's decoder diagram (Data[15:0], Valid, VBlank,
// HBlank); `field` and `code_err` are additions of this design.  Timing: the
// outputs lag the input by four clocks; one sample every two clocks.
module bt656_decoder
  import fusion_pkg::*;
(
  input  logic        clk,        // camera clock
  input  logic        rst_n,
  input  logic [7:0]  din,
  output logic [15:0] data,
  output logic        valid,
  output logic        hblank,
  output logic        vblank,
  output logic        field,
  output logic [7:0]  code_err
);
  logic [7:0] p [4];              // p[0] newest, p[3] leaves the window
  logic [1:0] skip;               // code bytes still to drop after p[3]
  logic       phase;              // 0: next active byte is chroma
  logic [7:0] chroma;

  logic       is_code, xy_ok;
  logic       xf, xv, xh;
  assign is_code = (p[3] == BT656_PRE0) && (p[2] == BT656_PRE1) && (p[1] == BT656_PRE1);
  assign {xf, xv, xh} = p[0][6:4];
  assign xy_ok = p[0][7] && (p[0][3] == (xv ^ xh)) && (p[0][2] == (xf ^ xh)) &&
                 (p[0][1] == (xf ^ xv)) && (p[0][0] == (xf ^ xv ^ xh));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 4; k++) p[k] <= 8'h10;
      skip     <= '0;
      phase    <= 1'b0;
      chroma   <= '0;
      data     <= '0;
      valid    <= 1'b0;
      hblank   <= 1'b1;
      vblank   <= 1'b1;
      field    <= 1'b0;
      code_err <= '0;
    end else begin
      p[0] <= din;
      p[1] <= p[0];
      p[2] <= p[1];
      p[3] <= p[2];
      valid <= 1'b0;
      if (skip != '0) begin
        skip <= skip - 1'b1;
      end else if (is_code) begin
        skip  <= 2'd3;            // drop 00 00 XY after this FF
        phase <= 1'b0;
        if (xy_ok) begin
          hblank <= xh;
          vblank <= xv;
          field  <= xf;
        end else begin
          code_err <= code_err + 1'b1;
        end
      end else if (!hblank && !vblank) begin
        if (!phase) begin
          chroma <= p[3];
        end else begin
          data  <= {chroma, p[3]};
          valid <= 1'b1;
        end
        phase <= !phase;
      end
    end
  end
endmodule
