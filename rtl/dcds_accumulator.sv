// dcds_accumulator -- the 32-bit up/down accumulator at the heart of the
// processor.
//
// On the first sample of every pixel it is reloaded, not with zero but with
// a digital bias, reset_val = (reference weight sum) << 10, which after gain
// normalisation is an offset of 1024 ADU that keeps bias-frame pixels
// positive. Weighted reference samples are added and weighted signal
// samples subtracted, so the result is bias + (reference - signal), the
// correlated double sample; all of this follows the original design. A
// sample that is in neither pedestal leaves the sum unchanged. When the
// last signal sample has been taken in, done pulses for one cycle with the
// pixel's final sum on acc. Arithmetic wraps modulo 2^32, as 32 bits do.
// Timing: one cycle from a product to its effect on acc.
module dcds_accumulator
  import dcds_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [ACC_W-1:0]  reset_val,
  input  logic              first,     // first sample of a pixel
  input  logic              up,        // reference sample: add
  input  logic              down,      // signal sample: subtract
  input  logic              last,      // last signal sample of the pixel
  input  logic [PROD_W-1:0] prod,
  output logic [ACC_W-1:0]  acc,
  output logic              done
);

  logic [ACC_W-1:0] base;

  always_comb begin
    base = first ? reset_val : acc;
    if (up)        base = base + ACC_W'(prod);
    else if (down) base = base - ACC_W'(prod);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc  <= '0;
      done <= 1'b0;
    end else begin
      acc  <= base;
      done <= last;
    end
  end

endmodule
