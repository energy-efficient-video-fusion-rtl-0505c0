// tb_wav_out_buffer: writes random (even, odd) pairs, reads every word back
// one at a time, and checks data and the one-cycle read latency.
module tb_wav_out_buffer;
  import fusion_pkg::*;
  localparam int WORDS = 2048;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0;
  logic [9:0] wr_idx = 0;
  logic [10:0] rd_addr = 0;
  data_t wr_even = 0, wr_odd = 0, rd_data;
  data_t model [WORDS];

  wav_out_buffer #(.WORDS(WORDS)) dut (.clk, .wr_en, .wr_idx, .wr_even, .wr_odd, .rd_en, .rd_addr, .rd_data);

  initial begin
    for (int k = 0; k < WORDS / 2; k++) begin
      model[2*k] = data_t'($urandom);
      model[2*k+1] = data_t'($urandom);
      wr_en <= 1; wr_idx <= 10'(k); wr_even <= model[2*k]; wr_odd <= model[2*k+1];
      @(posedge clk);
    end
    wr_en <= 0;
    for (int i = 0; i < WORDS; i += 3) begin
      rd_en <= 1; rd_addr <= 11'(i);
      @(posedge clk);
      rd_en <= 0;
      #1;
      checks++;
      if (rd_data !== model[i]) begin
        failures++;
        $display("word %0d: %h / %h", i, rd_data, model[i]);
      end
    end
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
