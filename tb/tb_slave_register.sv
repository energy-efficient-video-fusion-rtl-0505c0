// tb_slave_register: drives the camera register file directly.  Checks the
// byte-enabled CTRL write and capture_en, the STATUS bit as the inverse of
// frame_empty, DATA holding the last captured pixel, PIXCNT counting captures
// and clearing on a CTRL write, and a zero read when no register is selected.
module tb_slave_register;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_ctrl = 0, capture = 0, frame_empty = 1, capture_en;
  logic [31:0] wdata = 0, rd_data;
  logic [3:0] be = 0, rd_sel = 0;
  logic [7:0] din = 0;

  slave_register dut (.clk, .rst_n, .wr_ctrl, .wdata, .be, .capture, .din, .frame_empty,
                      .rd_sel, .rd_data, .capture_en);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic rd(input int r, output logic [31:0] d);
    @(negedge clk); rd_sel = 4'(1 << r); #1 d = rd_data; rd_sel = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd(0, d); check(d == 0 && !capture_en, "reset value");
    @(negedge clk); wr_ctrl = 1; wdata = 32'hA5A5_5A01; be = 4'b0101;
    @(negedge clk); wr_ctrl = 0;
    rd(0, d); check(d == 32'h00A5_0001 && capture_en, $sformatf("ctrl byte write %h", d));
    rd(1, d); check(d == 0, "status with empty store");
    frame_empty = 0;
    rd(1, d); check(d == 1, "status with frame waiting");
    for (int i = 0; i < 10; i++) begin
      logic [7:0] v;
      v = 8'($urandom);
      @(negedge clk); capture = 1; din = v;
      @(negedge clk); capture = 0;
      rd(2, d); check(d == {24'd0, v}, "data register");
      rd(3, d); check(d == 32'(i + 1), "pixel count");
    end
    @(negedge clk); wr_ctrl = 1; wdata = 0; be = 4'b0001;
    @(negedge clk); wr_ctrl = 0;
    rd(3, d); check(d == 0 && !capture_en, "count cleared by ctrl write");
    rd_sel = 0; #1 check(rd_data == 0, "no register selected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
