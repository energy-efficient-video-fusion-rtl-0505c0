// tb_wav_filter: checks the 12-tap two-output filter against the formula
//   out_a[k] = (sum_j coef_a[j] * x[2k+j]) >>> 16,  k = 0 .. N-1,
// for rows fed back-to-back and with gaps, and checks the 2-cycle latency of
// back-to-back rows (output k appears two cycles after beat k+6).
module tb_wav_filter;
  import fusion_pkg::*;
  localparam int N = 20;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;
  logic in_valid, first, out_valid;
  data_t in_a, in_b, out_a, out_b;
  data_t ca [TAPS], cb [TAPS];
  int checks = 0, failures = 0;

  wav_filter dut (.clk, .rst_n, .in_valid, .first, .in_a, .in_b,
                  .coef_a(ca), .coef_b(cb), .out_valid, .out_a, .out_b);

  data_t x [2*N+12];
  data_t ea [N], eb [N];
  int got, cyc, beat_cyc [N+6];

  function automatic data_t ref_dot(input data_t c [TAPS], input int k);
    longint s = 0;
    for (int j = 0; j < TAPS; j++) s += longint'(c[j]) * longint'(x[2*k+j]);
    return data_t'(s >>> FRAC_BITS);
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks++;
      if (got >= N || out_a !== ea[got] || out_b !== eb[got]) begin
        failures++;
        $display("mismatch k=%0d a=%0d/%0d b=%0d/%0d", got, out_a, ea[got], out_b, eb[got]);
      end
      if (gap_mode == 0) begin
        checks++;
        if (cyc != beat_cyc[got+6] + 2) begin
          failures++;
          $display("latency k=%0d: %0d cycles", got, cyc - beat_cyc[got+6]);
        end
      end
      got <= got + 1;
    end
  end

  int gap_mode;
  task automatic run_row(input int gaps);
    gap_mode = gaps;
    for (int j = 0; j < TAPS; j++) begin
      ca[j] = data_t'($signed($urandom_range(0, 1 << 18)) - (1 << 17));
      cb[j] = data_t'($signed($urandom_range(0, 1 << 18)) - (1 << 17));
    end
    for (int i = 0; i < 2*N+12; i++) x[i] = data_t'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
    for (int k = 0; k < N; k++) begin
      ea[k] = ref_dot(ca, k);
      eb[k] = ref_dot(cb, k);
    end
    got = 0;
    for (int i = 0; i < N + 6; i++) begin
      if (gaps != 0) begin
        in_valid <= 1'b0;
        repeat ($urandom_range(0, 2)) @(posedge clk);
      end
      in_valid <= 1'b1;
      first    <= (i == 0);
      in_a     <= x[2*i];
      in_b     <= x[2*i+1];
      @(posedge clk);
      beat_cyc[i] = cyc;
    end
    in_valid <= 1'b0;
    first    <= 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (got != N) begin
      failures++;
      $display("row produced %0d outputs, expected %0d", got, N);
    end
  endtask

  initial begin
    cyc = 0;
    in_valid = 0; first = 0; in_a = 0; in_b = 0;
    for (int j = 0; j < TAPS; j++) begin ca[j] = 0; cb[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_row(0);
    run_row(1);
    run_row(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
