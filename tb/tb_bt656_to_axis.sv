// tb_bt656_to_axis: drives decoded video (camera clock, 27 MHz) into the
// bridge and reads the stream on a 100 MHz clock with random back-pressure.
// Checks every sample in order, user=1 exactly on the first sample of each
// frame and last=1 exactly on the last sample of each line.  Then it stops
// reading for a whole frame, which must overflow the small queue and set the
// sticky error flag.
module tb_bt656_to_axis;
  localparam int W = 10, H = 4, FRAMES = 3;
  logic vclk = 0, aclk = 0, vrst_n = 1, arst_n = 1;
  initial begin #1 vrst_n = 0; arst_n = 0; end
  always #18.5 vclk = ~vclk;
  always #5 aclk = ~aclk;
  int checks = 0, failures = 0;

  logic [15:0] vid_data = 0, m_data;
  logic vid_valid = 0, vid_hblank = 1, vid_vblank = 1;
  logic m_valid, m_ready = 0, m_user, m_last, active, hblank, vblank, error, empty;

  bt656_to_axis #(.FIFO_AW(4)) dut (.vid_clk(vclk), .vid_rst_n(vrst_n), .vid_data, .vid_valid,
    .vid_hblank, .vid_vblank, .aclk, .aresetn(arst_n), .m_data, .m_valid, .m_ready, .m_user,
    .m_last, .active, .hblank, .vblank, .error, .empty);

  function automatic logic [15:0] pix(input int x, input int y, input int f);
    return 16'(f * 4096 + y * 64 + x);
  endfunction

  task automatic send_frame(input int f);
    vid_vblank <= 1; vid_hblank <= 1;
    repeat (6) @(posedge vclk);
    for (int y = 0; y < H; y++) begin
      vid_vblank <= 0; vid_hblank <= 1;
      repeat (4) @(posedge vclk);
      vid_hblank <= 0;
      for (int x = 0; x < W; x++) begin
        @(posedge vclk); vid_valid <= 1; vid_data <= pix(x, y, f);
        @(posedge vclk); vid_valid <= 0;
      end
      @(posedge vclk);
      vid_hblank <= 1;
    end
    repeat (2) @(posedge vclk);
    vid_vblank <= 1;
  endtask

  int ex = 0, ey = 0, ef = 0, beats = 0;
  bit reading = 1;
  always @(posedge aclk) begin
    if (reading) m_ready <= ($urandom_range(0, 3) != 0);
    else m_ready <= 0;
    if (arst_n && m_valid && m_ready && reading) begin
      checks++;
      beats++;
      if (m_data !== pix(ex, ey, ef) || m_user !== (ex == 0 && ey == 0) || m_last !== (ex == W - 1)) begin
        failures++;
        $display("beat x=%0d y=%0d f=%0d: data %h user %b last %b", ex, ey, ef, m_data, m_user, m_last);
      end
      if (ex == W - 1) begin
        ex <= 0;
        if (ey == H - 1) begin ey <= 0; ef <= ef + 1; end else ey <= ey + 1;
      end else ex <= ex + 1;
    end
  end

  initial begin
    repeat (3) @(posedge vclk);
    vrst_n = 1; arst_n = 1;
    for (int f = 0; f < FRAMES; f++) send_frame(f);
    repeat (200) @(posedge aclk);
    checks++;
    if (beats != W * H * FRAMES || error || !empty) begin
      failures++;
      $display("beats %0d of %0d, error %b, empty %b", beats, W * H * FRAMES, error, empty);
    end
    reading = 0;
    send_frame(FRAMES);
    repeat (10) @(posedge vclk);
    checks++;
    if (!error) begin failures++; $display("overflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge aclk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
