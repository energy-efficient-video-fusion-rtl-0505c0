// tb_output_fifo: whole-frame store with a 24-pixel frame.  A frame written
// while capture is disabled must be ignored; with capture enabled the first
// frame is stored, the next one arrives while the store is still full and
// must be dropped (and counted), the stored frame is read back byte for byte
// on a different clock, reading an empty store must not change anything,
// and after the read a new frame is accepted again.
module tb_output_fifo;
  localparam int N = 24;
  logic wclk = 0, rclk = 0, rst = 0;
  initial #1 rst = 1;
  always #5 wclk = ~wclk;
  always #6.5 rclk = ~rclk;
  int checks = 0, failures = 0;

  logic enable = 0, wren = 0, s_user = 0, s_last = 0, s_ready, rden = 0, empty;
  logic [15:0] s_data = 0, frames_stored, frames_dropped;
  logic [7:0] dout;

  output_fifo #(.FRAME_PIXELS(N)) dut (.rst, .wrclk(wclk), .enable, .s_data, .wren, .s_ready,
    .s_user, .s_last, .frames_stored, .frames_dropped, .rdclk(rclk), .rden, .dout, .empty);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] pix(input int i, input int f);
    return {8'h80, 8'(f * 40 + i)};
  endfunction

  task automatic send(input int f);
    for (int i = 0; i < N; i++) begin
      @(negedge wclk);
      while ($urandom_range(0, 2) == 0) @(negedge wclk);
      wren = 1; s_data = pix(i, f); s_user = (i == 0); s_last = (i % 6 == 5);
      @(negedge wclk);
      wren = 0;
    end
    repeat (10) @(negedge wclk);
  endtask

  task automatic read_frame(input int f);
    for (int i = 0; i < N; i++) begin
      @(negedge rclk);
      check(!empty, "store empty during read");
      rden = 1;
      @(negedge rclk);
      rden = 0;
      check(dout == pix(i, f)[7:0], $sformatf("frame %0d byte %0d: %h", f, i, dout));
    end
  endtask

  initial begin
    repeat (3) @(negedge wclk);
    rst = 0;
    send(0);                                     // capture disabled
    check(empty && frames_stored == 0 && frames_dropped == 0, "frame stored while disabled");
    enable = 1;
    repeat (4) @(negedge wclk);
    send(1);
    repeat (4) @(negedge rclk);
    check(!empty && frames_stored == 1, "frame 1 not stored");
    send(2);                                     // store is full: dropped
    check(frames_dropped == 1 && frames_stored == 1, "frame 2 not dropped");
    read_frame(1);
    repeat (4) @(negedge rclk);
    check(empty, "store not empty after read");
    @(negedge rclk); rden = 1; @(negedge rclk); rden = 0;   // read while empty
    check(empty && dout == pix(N - 1, 1)[7:0], "read while empty changed state");
    repeat (4) @(negedge wclk);
    send(3);
    repeat (4) @(negedge rclk);
    check(!empty && frames_stored == 2, "frame 3 not stored");
    read_frame(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge wclk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
