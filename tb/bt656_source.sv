// bt656_source: behavioural model of a camera with an ITU-R BT.656 output,
// for testbenches only.  Each frame is VBL blanking lines (V=1) then H active
// lines of W pixels; each line is EAV, HBL blanking byte pairs (80 10), SAV
// and 2*W active bytes Cb Y Cr Y ...  Luma is luma(x, y, frame) below, chroma
// 0x80; no byte of a picture is 00 or FF.  `bad_code` corrupts the protection
// bits of the next SAV once (the decoder must ignore that code).
module bt656_source #(
  parameter int unsigned W   = 16,
  parameter int unsigned H   = 6,
  parameter int unsigned HBL = 8,
  parameter int unsigned VBL = 2
) (
  input  logic       clk,
  input  logic       run,
  input  logic       bad_code,
  output logic [7:0] data,
  output int         frame,
  output int         line_no
);
  function automatic logic [7:0] luma(input int x, input int y, input int f);
    return 8'(16 + ((x * 3 + y * 7 + f * 11) % 200));
  endfunction
  function automatic logic [7:0] xy(input bit fb, input bit v, input bit h);
    return {1'b1, fb, v, h, v ^ h, fb ^ h, fb ^ v, fb ^ v ^ h};
  endfunction

  localparam int LINE_BYTES = 4 + 2*HBL + 4 + 2*W;
  int pos = 0;
  bit corrupt = 0;
  initial begin data = 8'h10; frame = 0; line_no = 0; end

  always @(posedge clk) begin
    if (bad_code) corrupt <= 1;
    if (run) begin
      automatic bit v = (line_no < VBL);
      automatic int y = line_no - VBL;
      automatic int b;
      if (pos < 4) begin                       // EAV
        case (pos)
          0: data <= 8'hFF;
          1, 2: data <= 8'h00;
          default: data <= xy(0, v, 1);
        endcase
      end else if (pos < 4 + 2*HBL) begin      // horizontal blanking
        data <= pos[0] ? 8'h10 : 8'h80;
      end else if (pos < 8 + 2*HBL) begin      // SAV
        case (pos - 4 - 2*HBL)
          0: data <= 8'hFF;
          1, 2: data <= 8'h00;
          default: begin
            data <= xy(0, v, 0) ^ (corrupt ? 8'h01 : 8'h00);
            corrupt <= 0;
          end
        endcase
      end else begin                           // active bytes
        b = pos - 8 - 2*HBL;
        if (v) data <= b[0] ? 8'h10 : 8'h80;
        else   data <= b[0] ? luma(b / 2, y, frame) : 8'h80;
      end
      if (pos == LINE_BYTES - 1) begin
        pos <= 0;
        if (line_no == VBL + H - 1) begin
          line_no <= 0;
          frame   <= frame + 1;
        end else line_no <= line_no + 1;
      end else pos <= pos + 1;
    end
  end
endmodule
