// wav_filter: the two-output 12-tap filter at the heart of the wavelet engine.
//
// Every accepted input beat carries two consecutive samples (a, b) of one
// image row.  The filter keeps the last TAPS samples in a shift register and,
// for each beat, forms two dot products of that register with two coefficient
// vectors (coef_a, coef_b): in the forward transform these are the high-pass
// and low-pass analysis filters, so each beat yields one high-pass and one
// low-pass coefficient of a 2:1 decimated row.  The products are formed from
// the register contents *before* the new pair is shifted in, exactly as the
// reference loop does (multiply taps 0..11, then move every sample down by two
// and append a, b at taps 10 and 11).  The first HALF_TAPS beats after `first`
// only fill the register and produce no output (the loop's "i > 5" guard), so
// N+6 beats yield N output pairs:
//     out_a[k] = sum_j coef_a[j] * x[2k+j],  out_b[k] = sum_j coef_b[j] * x[2k+j]
//
// Timing: one beat per cycle (initiation interval 1, as the paper reports for
// the synthesized loop).  Latency 2 cycles: products are registered, then the
// sum is registered on out_valid.  No back-pressure.
//
// Arithmetic is this design's own choice: samples and coefficients are signed
// fixed point with FRAC_BITS fractional bits; products are kept at full width,
// summed exactly, then shifted right by FRAC_BITS and truncated to DATA_W bits.
module wav_filter
  import fusion_pkg::*;
#(
  parameter int unsigned NTAPS = TAPS,
  parameter int unsigned FRAC  = FRAC_BITS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,            // with in_valid: beat 0 of a new row
  input  data_t in_a,             // sample 2i
  input  data_t in_b,             // sample 2i+1
  input  data_t coef_a [NTAPS],
  input  data_t coef_b [NTAPS],
  output logic  out_valid,
  output data_t out_a,
  output data_t out_b
);
  localparam int unsigned SUM_W = 2*DATA_W + $clog2(NTAPS) + 1;
  localparam int unsigned PRIME = NTAPS / 2;

  data_t sr [NTAPS];
  acc_t  prod_a [NTAPS];
  acc_t  prod_b [NTAPS];
  logic  prod_valid;
  logic [$clog2(PRIME+1)-1:0] primed;   // beats seen in this row, saturating at PRIME

  // Stage 1: multiply the current register, shift in the new pair.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NTAPS; j++) begin
        sr[j]     <= '0;
        prod_a[j] <= '0;
        prod_b[j] <= '0;
      end
      prod_valid <= 1'b0;
      primed     <= '0;
    end else begin
      prod_valid <= 1'b0;
      if (in_valid) begin
        for (int j = 0; j < NTAPS; j++) begin
          prod_a[j] <= acc_t'(coef_a[j]) * acc_t'(sr[j]);
          prod_b[j] <= acc_t'(coef_b[j]) * acc_t'(sr[j]);
        end
        for (int j = 0; j < NTAPS-2; j++) sr[j] <= sr[j+2];
        sr[NTAPS-2] <= in_a;
        sr[NTAPS-1] <= in_b;
        if (first) begin
          primed <= 1;
        end else begin
          prod_valid <= (primed == PRIME[$bits(primed)-1:0]);
          if (primed != PRIME[$bits(primed)-1:0]) primed <= primed + 1'b1;
        end
      end
    end
  end

  // Stage 2: sum and rescale.
  logic signed [SUM_W-1:0] sum_a, sum_b, sh_a, sh_b;
  always_comb begin
    sum_a = '0;
    sum_b = '0;
    for (int j = 0; j < NTAPS; j++) begin
      sum_a += SUM_W'(prod_a[j]);
      sum_b += SUM_W'(prod_b[j]);
    end
    sh_a = sum_a >>> FRAC;
    sh_b = sum_b >>> FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_a     <= '0;
      out_b     <= '0;
    end else begin
      out_valid <= prod_valid;
      if (prod_valid) begin
        out_a <= data_t'(sh_a[DATA_W-1:0]);
        out_b <= data_t'(sh_b[DATA_W-1:0]);
      end
    end
  end
endmodule
