// tb_bt656_decoder: feeds the decoder a BT.656 stream from bt656_source and
// checks every decoded sample ({Cb/Cr, Y}) in raster order, the number of
// samples per line and per frame, that blanking flags bracket them, and that
// a timing code with bad protection bits (the SAV of a blanking line) is
// counted and ignored.
module tb_bt656_decoder;
  localparam int W = 12, H = 5, VBL = 2;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic run = 0, bad_code = 0;
  logic [7:0] din, code_err;
  logic [15:0] data;
  logic valid, hblank, vblank, field;
  int frame, line_no;

  bt656_source #(.W(W), .H(H), .HBL(6), .VBL(VBL)) src (.clk, .run, .bad_code, .data(din), .frame, .line_no);
  bt656_decoder dut (.clk, .rst_n, .din, .data, .valid, .hblank, .vblank, .field, .code_err);

  function automatic logic [7:0] luma(input int x, input int y, input int f);
    return 8'(16 + ((x * 3 + y * 7 + f * 11) % 200));
  endfunction

  int x = 0, y = 0, f = -1, frames_seen = 0;
  logic vb_d = 1, hb_d = 1;
  always @(posedge clk) if (rst_n) begin
    vb_d <= vblank;
    hb_d <= hblank;
    if (!vblank && vb_d) begin              // start of an active picture
      y <= 0; x <= 0;
      f <= f + 1;
    end
    if (hblank && !hb_d && !vb_d) begin     // end of an active line
      checks++;
      if (x != W) begin failures++; $display("line %0d has %0d samples", y, x); end
      x <= 0;
      y <= y + 1;
      if (vblank) begin                     // ... and of the picture
        checks++;
        frames_seen <= frames_seen + 1;
        if (y + 1 != H) begin failures++; $display("frame %0d has %0d lines", f, y + 1); end
      end
    end
    if (valid) begin
      checks++;
      if (hblank || vblank || data !== {8'h80, luma(x, y, f)}) begin
        failures++;
        $display("sample x=%0d y=%0d f=%0d got %h", x, y, f, data);
      end
      x <= x + 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run = 1;
    wait (frame == 1);
    bad_code <= 1;
    @(posedge clk);
    bad_code <= 0;
    wait (frame == 3);
    repeat (10) @(posedge clk);
    checks++;
    if (code_err != 1 || frames_seen < 2) begin
      failures++;
      $display("code errors %0d, frames %0d", code_err, frames_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
