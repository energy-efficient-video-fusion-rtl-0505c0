// tb_video_scale: sends three frames of IN_W x IN_H samples with random gaps
// into the scaler and reads the output with random back-pressure.  The
// expected output is computed from the closed form of nearest-neighbour
// scaling: input sample x is kept when floor((x+1)*OUT_W/IN_W) passes
// floor(x*OUT_W/IN_W), and input line y is sent
// floor((y+1)*OUT_H/IN_H) - floor(y*OUT_H/IN_H) times (1 or 2).  Every output
// sample is compared with data, user (first sample of an output frame) and
// last (sample OUT_W-1 of each line); the numbers of dropped samples and
// repeated lines are counted and must be non-zero.
module tb_video_scale;
  localparam int IN_W = 11, IN_H = 5, OUT_W = 7, OUT_H = 9, FRAMES = 3;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] s_data = 0, m_data;
  logic s_valid = 0, s_ready, s_user = 0, s_last = 0, m_valid, m_ready = 0, m_user, m_last;

  video_scale #(.IN_W(IN_W), .IN_H(IN_H), .OUT_W(OUT_W), .OUT_H(OUT_H)) dut (
    .aclk(clk), .aresetn(rst_n), .s_data, .s_valid, .s_ready, .s_user, .s_last,
    .m_data, .m_valid, .m_ready, .m_user, .m_last);

  function automatic logic [15:0] pix(input int x, input int y, input int f);
    return 16'(f * 4096 + y * 64 + x);
  endfunction

  // expected output stream
  logic [15:0] exp_d [$];
  logic        exp_u [$], exp_l [$];
  int dropped = 0, repeated = 0;
  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < IN_H; y++) begin
        int reps;
        reps = (y + 1) * OUT_H / IN_H - y * OUT_H / IN_H;
        if (reps == 2) repeated++;
        for (int r = 0; r < reps; r++) begin
          int ox;
          ox = 0;
          for (int x = 0; x < IN_W; x++)
            if ((x + 1) * OUT_W / IN_W > x * OUT_W / IN_W) begin
              exp_d.push_back(pix(x, y, f));
              exp_u.push_back(y == 0 && r == 0 && ox == 0);
              exp_l.push_back(ox == OUT_W - 1);
              ox++;
            end else if (r == 0) dropped++;
        end
      end
  end

  int got = 0;
  always @(posedge clk) begin
    m_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && m_valid && m_ready) begin
      checks++;
      if (exp_d.size() == 0) begin
        failures++; $display("unexpected output %h", m_data);
      end else begin
        logic [15:0] d; logic u, l;
        d = exp_d.pop_front(); u = exp_u.pop_front(); l = exp_l.pop_front();
        if (m_data !== d || m_user !== u || m_last !== l) begin
          failures++;
          $display("out %0d: got %h u%b l%b, want %h u%b l%b", got, m_data, m_user, m_last, d, u, l);
        end
      end
      got++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < IN_H; y++)
        for (int x = 0; x < IN_W; x++) begin
          // drive after the falling edge; s_ready is stable until the rising one
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) @(negedge clk);
          s_valid = 1; s_data = pix(x, y, f);
          s_user = (x == 0 && y == 0); s_last = (x == IN_W - 1);
          #1;
          while (!s_ready) begin @(negedge clk); #1; end
          @(posedge clk);
          #1 s_valid = 0;
        end
    repeat (100) @(posedge clk);
    checks++;
    if (exp_d.size() != 0 || got != FRAMES * OUT_W * OUT_H) begin
      failures++; $display("outputs %0d, %0d expected still pending", got, exp_d.size());
    end
    checks++;
    if (dropped == 0 || repeated == 0) begin failures++; $display("no drop/repeat exercised"); end
    $display("dropped samples per frame set %0d, repeated lines %0d", dropped, repeated);
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
