// dcds_output_stage -- drives the pixel output port in either of the
// processor's two modes.
//
// Normal mode: each normalised 18-bit pixel is delayed by PAD cycles and
// registered onto PIXELOUT with a one-cycle PixelWR strobe. PAD sets the
// total latency; the processor chooses it so that a pixel appears 20 ADC
// clocks after the last sample of its signal pedestal, the latency the
// original design reports (how the original spends those 20 cycles is not
// known; here the arithmetic takes 12 and the rest is this delay).
// Oscilloscope mode: every ADC sample of the line is written out raw, with
// its lowest bit replaced by a flag that is 1 when the sample lies in either
// pedestal, as in the original design. The raw word takes the integer field
// PIXELOUT[17:2] and the two fraction bits are zero (this placement is this
// design's choice). Either way line_done pulses once the line's last word
// has been written.
module dcds_output_stage
  import dcds_pkg::*;
#(
  parameter int unsigned PAD = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             scope_mode,
  input  logic             pix_valid,
  input  logic [PIX_W-1:0] pixel,
  input  logic             pix_lastpix,   // pixel is the last of the line
  input  logic [ADC_W-1:0] smp,           // raw sample ...
  input  smp_flags_t       smp_flags,     // ... and its flags, aligned
  output logic [PIX_W-1:0] pixelout,
  output logic             pixelwr,
  output logic             line_done
);

  localparam int unsigned D = (PAD == 0) ? 1 : PAD;

  logic [PIX_W-1:0] d_pix  [D];
  logic             d_v    [D];
  logic             d_last [D];
  logic [PIX_W-1:0] n_pix;
  logic             n_v, n_last;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < D; k++) begin
        d_v[k]    <= 1'b0;
        d_last[k] <= 1'b0;
      end
    end else begin
      d_v[0]    <= pix_valid;
      d_last[0] <= pix_valid && pix_lastpix;
      for (int k = 1; k < D; k++) begin
        d_v[k]    <= d_v[k-1];
        d_last[k] <= d_last[k-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    d_pix[0] <= pixel;
    for (int k = 1; k < D; k++) d_pix[k] <= d_pix[k-1];
  end

  always_comb begin
    if (PAD == 0) begin
      n_pix  = pixel;
      n_v    = pix_valid;
      n_last = pix_valid && pix_lastpix;
    end else begin
      n_pix  = d_pix[D-1];
      n_v    = d_v[D-1];
      n_last = d_last[D-1];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pixelout  <= '0;
      pixelwr   <= 1'b0;
      line_done <= 1'b0;
    end else if (scope_mode) begin
      pixelout  <= {smp[ADC_W-1:1], smp_flags.ref_s | smp_flags.sig_s, 2'b00};
      pixelwr   <= smp_flags.line;
      line_done <= smp_flags.eol;
    end else begin
      pixelout  <= n_v ? n_pix : pixelout;
      pixelwr   <= n_v;
      line_done <= n_last;
    end
  end

endmodule
