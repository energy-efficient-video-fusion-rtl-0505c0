// tb_wav_in_buffer: writes random words one at a time, reads them back as
// even/odd pairs, and checks data and the one-cycle read latency.
module tb_wav_in_buffer;
  import fusion_pkg::*;
  localparam int WORDS = 2060;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0;
  logic [11:0] wr_addr = 0;
  logic [10:0] rd_idx = 0;
  data_t wr_data = 0, rd_even, rd_odd;
  data_t model [WORDS];

  wav_in_buffer #(.WORDS(WORDS)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_idx, .rd_even, .rd_odd);

  initial begin
    for (int i = 0; i < WORDS; i++) begin
      model[i] = data_t'($urandom);
      wr_en <= 1; wr_addr <= 12'(i); wr_data <= model[i];
      @(posedge clk);
    end
    wr_en <= 0;
    for (int k = 0; k < WORDS / 2; k += 7) begin
      rd_en <= 1; rd_idx <= 11'(k);
      @(posedge clk);
      rd_en <= 0;
      #1;
      checks++;
      if (rd_even !== model[2*k] || rd_odd !== model[2*k+1]) begin
        failures++;
        $display("pair %0d: %h %h / %h %h", k, rd_even, rd_odd, model[2*k], model[2*k+1]);
      end
    end
    // last pair of the buffer
    rd_en <= 1; rd_idx <= 11'(WORDS/2 - 1);
    @(posedge clk); rd_en <= 0; #1;
    checks++;
    if (rd_even !== model[WORDS-2] || rd_odd !== model[WORDS-1]) failures++;
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
