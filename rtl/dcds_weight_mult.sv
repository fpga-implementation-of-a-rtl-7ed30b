// dcds_weight_mult -- weights one ADC sample: 16-bit sample x 8-bit weight
// = 24-bit product, as in the original design's "weight samples" multipliers.
//
// Written as a three-stage pipeline (input registers, multiply register,
// product register), the arrangement of a DSP48 slice; the stage count is
// this design's choice. A side-band tag (the sample's control flags) travels
// with the operands so that it leaves together with the product.
// Timing: prod and tag_out appear 3 cycles after a and b.
module dcds_weight_mult
  import dcds_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic              clk,
  input  logic [ADC_W-1:0]  a,        // ADC sample
  input  logic [COEF_W-1:0] b,        // weight
  input  logic [TAG_W-1:0]  tag_in,
  output logic [PROD_W-1:0] prod,
  output logic [TAG_W-1:0]  tag_out
);

  logic [ADC_W-1:0]  a_r;
  logic [COEF_W-1:0] b_r;
  logic [PROD_W-1:0] m_r;
  logic [TAG_W-1:0]  t1, t2;

  always_ff @(posedge clk) begin
    a_r     <= a;
    b_r     <= b;
    t1      <= tag_in;
    m_r     <= PROD_W'(a_r) * PROD_W'(b_r);
    t2      <= t1;
    prod    <= m_r;
    tag_out <= t2;
  end

endmodule
