// reset_sync: asynchronous-assert, synchronous-release reset for one clock
// domain.  `rst_in` (active high) clears the two-stage chain at once; the
// active-low output rises two clock edges after rst_in falls.
module reset_sync (
  input  logic clk,
  input  logic rst_in,
  output logic rst_n
);
  logic s1;
  always_ff @(posedge clk or posedge rst_in) begin
    if (rst_in) begin
      s1    <= 1'b0;
      rst_n <= 1'b0;
    end else begin
      s1    <= 1'b1;
      rst_n <= s1;
    end
  end
endmodule
