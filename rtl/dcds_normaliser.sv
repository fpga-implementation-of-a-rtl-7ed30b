// dcds_normaliser -- gain normalisation of a finished pixel.
//
// Multiplies the 32-bit accumulator result by the 32-bit output scaler
// floor((2^32-1)/weight sum) and keeps bits 47..30 of the 64-bit product:
// bits 47..32 are the 16-bit integer pixel value and bits 31..30 the two
// bits after the binary point, giving the 18-bit pixel of the original
// design. The product is pipelined to the original's 6-cycle latency (input
// registers, multiply, four product registers); the "bit shift" is only the
// choice of product bits. Integer results above 65535 wrap, as in the
// original 18-bit output. A tag travels with the data.
// Timing: out_valid, pixel and tag_out appear 6 cycles after in_valid.
module dcds_normaliser
  import dcds_pkg::*;
#(
  parameter int unsigned TAG_W   = 1,
  parameter int unsigned LATENCY = 6    // at least 2
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic [ACC_W-1:0]   acc,
  input  logic [SCALE_W-1:0] scale,
  input  logic [TAG_W-1:0]   tag_in,
  output logic               out_valid,
  output logic [PIX_W-1:0]   pixel,
  output logic [TAG_W-1:0]   tag_out
);

  localparam int unsigned PW = ACC_W + SCALE_W;

  logic [ACC_W-1:0]   a_r;
  logic [SCALE_W-1:0] b_r;
  logic [PW-1:0]      p   [LATENCY-1];   // p[0] = product, then LATENCY-2 more registers
  logic               v   [LATENCY];
  logic [TAG_W-1:0]   t   [LATENCY];

  always_ff @(posedge clk) begin
    if (rst) for (int k = 0; k < LATENCY; k++) v[k] <= 1'b0;
    else begin
      v[0] <= in_valid;
      for (int k = 1; k < LATENCY; k++) v[k] <= v[k-1];
    end
  end

  always_ff @(posedge clk) begin
    a_r  <= acc;
    b_r  <= scale;
    t[0] <= tag_in;
    p[0] <= PW'(a_r) * PW'(b_r);
    for (int k = 1; k < LATENCY; k++)   t[k] <= t[k-1];
    for (int k = 1; k < LATENCY-1; k++) p[k] <= p[k-1];
  end

  assign out_valid = v[LATENCY-1];
  assign tag_out   = t[LATENCY-1];
  assign pixel     = p[LATENCY-2][47:30];

endmodule
