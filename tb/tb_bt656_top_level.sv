// tb_bt656_top_level: a behavioural BT.656 camera (12x5 active pixels per
// field) feeds the whole capture path: decoder, clock-crossing bridge, scaler
// to 8x9 and the frame store.  The test enables capture, lets several fields
// pass so that the full store drops some, then reads the stored frame on the
// read clock and compares every byte with the scaled luma of one camera
// field (the field number is taken from the first byte).  A corrupted SAV
// code is injected and must be counted without disturbing the picture.  After
// the read a later field must be stored and read correctly as well.
module tb_bt656_top_level;
  localparam int W = 12, H = 5, OW = 8, OH = 9;
  logic tclk = 0, sclk = 0, rclk = 0, mclr = 0;
  initial #1 mclr = 1;
  always #18.5 tclk = ~tclk;
  always #5 sclk = ~sclk;
  always #6 rclk = ~rclk;
  int checks = 0, failures = 0;

  logic run = 0, bad_code = 0, capture_en = 0, rden = 0, frame_empty, vid_error;
  logic [7:0] data, dout, code_err;
  logic [15:0] frames_stored, frames_dropped;
  int frame, line_no;

  bt656_source #(.W(W), .H(H), .HBL(8), .VBL(2)) cam (.clk(tclk), .run, .bad_code, .data,
                                                       .frame, .line_no);
  bt656_top_level #(.IN_W(W), .IN_H(H), .OUT_W(OW), .OUT_H(OH), .FIFO_AW(5)) dut (
    .mclr, .thermal_clk(tclk), .thermal_data(data), .sys_clk(sclk), .rdclk(rclk), .capture_en,
    .rden, .thermal_dout(dout), .frame_empty, .vid_error, .code_err, .frames_stored,
    .frames_dropped);

  function automatic logic [7:0] luma(input int x, input int y, input int f);
    return 8'(16 + ((x * 3 + y * 7 + f * 11) % 200));
  endfunction
  // input sample / line that nearest-neighbour scaling takes for output ox / oy
  function automatic int src_x(input int ox);
    for (int x = 0; x < W; x++) if ((x + 1) * OW / W > ox) return x;
    return W - 1;
  endfunction
  function automatic int src_y(input int oy);
    for (int y = 0; y < H; y++) if ((y + 1) * OH / H > oy) return y;
    return H - 1;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reads one stored frame; returns the camera field number it came from
  task automatic read_frame(output int f);
    int bad = 0;
    f = -1;
    for (int i = 0; i < OW * OH; i++) begin
      @(negedge rclk); rden = 1;
      @(negedge rclk); rden = 0;
      if (i == 0) begin
        for (int k = 0; k < 64; k++) if (dout == luma(src_x(0), src_y(0), k)) begin f = k; break; end
      end
      if (dout != luma(src_x(i % OW), src_y(i / OW), f)) begin
        bad++;
        if (bad < 5) $display("pixel %0d: %h want %h (field %0d)", i, dout,
                              luma(src_x(i % OW), src_y(i / OW), f), f);
      end
    end
    check(f >= 0 && bad == 0, $sformatf("stored frame: %0d wrong bytes", bad));
  endtask

  initial begin
    int f1, f2;
    repeat (3) @(negedge sclk);
    mclr = 0;
    run = 1;
    capture_en = 1;
    wait (frame == 2);
    @(negedge tclk) bad_code = 1;
    @(negedge tclk) bad_code = 0;
    wait (frame == 6);
    check(!frame_empty && frames_stored == 1, $sformatf("stored %0d", frames_stored));
    check(frames_dropped >= 2, $sformatf("dropped %0d", frames_dropped));
    check(code_err == 1, $sformatf("code errors %0d", code_err));
    check(!vid_error, "bridge overflow");
    read_frame(f1);
    @(negedge rclk);
    check(frame_empty || frames_stored == 2, "store not released after read");
    wait (frames_stored == 2);
    repeat (4) @(negedge rclk);
    check(!frame_empty, "second frame not visible");
    read_frame(f2);
    check(f2 > f1, $sformatf("fields %0d then %0d", f1, f2));
    $display("fields read %0d and %0d, dropped %0d", f1, f2, frames_dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge sclk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
