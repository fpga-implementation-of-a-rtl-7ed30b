// dcds_processor -- top level of the single-channel DCDS video processor.
//
// A CCD's output is a train of pixels, each a reference level followed by a
// signal level; the pixel value is their difference. This processor samples
// the video with a 16-bit ADC, weights every sample of the reference and of
// the signal pedestal with a programmable 8-bit weight (up to 256 samples
// per pedestal), accumulates reference minus signal in a 32-bit up/down
// accumulator preloaded with a digital bias, and normalises the result by
// the reciprocal of the weight sum so that the gain is one whatever the
// weights. Ports and their names follow the original block symbol.
//
// Clocks: ramclk loads the configuration registers and weights; adcCLK, the
// ADC's 20 MHz conversion clock, runs everything else. ADC_DATA is captured
// on clkDCO, the data clock the ADC echoes, and handed to adcCLK one cycle
// later; the two are the same frequency and this design assumes a fixed
// phase between them that meets timing (it has no FIFO for that crossing).
// rst is applied synchronously in both domains and must last at least two
// cycles of each clock. linetrig is synchronised to adcCLK and acts on its
// rising edge.
//
// Use: after reset, write the 16 configuration words with Config_wen and
// the 512 weights with Coeff_wen (one per write, low byte of the bus), then
// raise dataloaded. About 66 + pedestal-length cycles later ready rises
// unless error reports an inconsistent configuration. Each linetrig then
// reads one line: start_of_pixel and dump_event drive the CCD clocking,
// and every pixel appears on PIXELOUT (16 integer bits, 2 fraction bits)
// with a PixelWR strobe 20 adcCLK cycles after the ADC sample that ends its
// signal pedestal reached the processor's input register. ADCPL is the
// ADC's pipeline length: sample k of a pixel, counted from the cycle in
// which start_of_pixel is high, must be on the ADC_DATA pins k + ADCPL
// cycles after that cycle; the two input registers are accounted for
// internally. Spare1 bit 0 selects oscilloscope mode, in which the line's
// raw samples are written out instead.
module dcds_processor
  import dcds_pkg::*;
#(
  parameter int unsigned MAX_ADCPL   = 64,  // longest ADC pipeline the alignment supports
  parameter int unsigned PIX_LATENCY = 20   // end of signal pedestal to PixelWR
) (
  input  logic             adcCLK,
  input  logic             clkDCO,
  input  logic             ramclk,
  input  logic             Coeff_wen,
  input  logic             Config_wen,
  input  logic             rst,
  input  logic             linetrig,
  input  logic             dataloaded,
  input  logic [15:0]      SetupDATAfromHost,
  input  logic [15:0]      ADC_DATA,
  output logic             error,
  output logic             ready,
  output logic             lineactive,
  output logic             pixactive,
  output logic [PIX_W-1:0] PIXELOUT,
  output logic             PixelWR,
  output logic             start_of_pixel,
  output logic             dump_event
);

  // cycles of the normal path from the last signal sample at the input
  // register to the output register, without padding: RAM read 1, weight
  // multiplier 3, accumulator 1, normaliser 6, output register 1
  localparam int unsigned PIPE_FIXED = 12;
  localparam int unsigned PAD = PIX_LATENCY - PIPE_FIXED;
  localparam int unsigned FW  = $bits(smp_flags_t);

  // ---------------- host side (ramclk) ----------------
  logic [NREGS*REG_W-1:0] regs;
  logic [COEF_AW-1:0]     raddr, sum_raddr;
  logic [COEF_W-1:0]      rdata;

  dcds_config_regs u_regs (
    .clk(ramclk), .rst, .wen(Config_wen), .wdata(SetupDATAfromHost),
    .dataloaded, .regs
  );

  dcds_coeff_ram u_coef (
    .wclk(ramclk), .rst, .wen(Coeff_wen), .wdata(SetupDATAfromHost),
    .dataloaded, .rclk(adcCLK), .raddr, .rdata
  );

  // ---------------- setup (adcCLK) ----------------
  dcds_cfg_t          cfg;
  logic               sum_start, sum_done, sum_busy, div_start, div_valid;
  logic [8:0]         sum_len;
  logic [SUM_W-1:0]   sum, div_divisor;
  logic [SCALE_W-1:0] div_q, scale;
  logic [ACC_W-1:0]   reset_val;
  logic               sum_zero, configured;
  logic               err_len, err_overlap, err_end, err_other, cfg_err;

  dcds_setup_ctrl u_setup (
    .clk(adcCLK), .rst, .dataloaded, .regs,
    .sum_start, .sum_len, .sum_done, .sum,
    .div_start, .div_divisor, .div_valid, .div_quotient(div_q),
    .cfg, .scale, .reset_val, .sum_zero, .configured
  );

  dcds_coeff_sum u_sum (
    .clk(adcCLK), .rst, .start(sum_start), .len(sum_len),
    .raddr(sum_raddr), .rdata, .busy(sum_busy), .done(sum_done), .sum
  );

  dcds_recip_div u_div (
    .clk(adcCLK), .rst, .in_valid(div_start), .divisor(div_divisor),
    .out_valid(div_valid), .quotient(div_q)
  );

  dcds_config_check #(.MAX_ADCPL(MAX_ADCPL)) u_check (
    .cfg, .err_len, .err_overlap, .err_end, .err_other, .error(cfg_err)
  );

  assign error = cfg_err || sum_zero;

  // ---------------- sequencing (adcCLK) ----------------
  logic       trig_s1, trig_s2, trig_s3, trig;
  logic       seq_idle, line_done;
  smp_flags_t seq_flags, dflags;

  always_ff @(posedge adcCLK) begin
    if (rst) {trig_s1, trig_s2, trig_s3} <= '0;
    else     {trig_s3, trig_s2, trig_s1} <= {trig_s2, trig_s1, linetrig};
  end
  assign trig = trig_s2 && !trig_s3;

  dcds_sequencer u_seq (
    .clk(adcCLK), .rst, .cfg, .enable(configured && !error), .trig,
    .line_done, .idle(seq_idle), .lineactive, .pixactive,
    .start_of_pixel, .dump_event, .flags(seq_flags)
  );

  assign ready = configured && !error && seq_idle;

  // the flags wait for the ADC pipeline plus the two input registers
  localparam int unsigned IN_REGS = 2;

  dcds_align #(.W(FW), .MAX_DELAY(MAX_ADCPL + IN_REGS)) u_align (
    .clk(adcCLK), .rst, .delay(cfg.adcpl + 16'(IN_REGS)), .din(seq_flags), .dout(dflags)
  );

  // ---------------- sample path (adcCLK) ----------------
  logic [ADC_W-1:0]  adc_dco, adc_q, adc_s1;
  smp_flags_t        f_s1, f_m;
  logic [PROD_W-1:0] prod;
  logic [ACC_W-1:0]  acc;
  logic              acc_done, acc_lastpix;
  logic              pix_valid, pix_lastpix;
  logic [PIX_W-1:0]  pixel;

  always_ff @(posedge clkDCO) adc_dco <= ADC_DATA;
  always_ff @(posedge adcCLK) adc_q   <= adc_dco;

  // the weight of the sample now in adc_q is read while it is registered
  assign raddr = configured ? {dflags.sig_s, dflags.idx} : sum_raddr;

  always_ff @(posedge adcCLK) begin
    adc_s1 <= adc_q;
    if (rst) f_s1 <= '0;
    else     f_s1 <= dflags;
  end

  dcds_weight_mult #(.TAG_W(FW)) u_mult (
    .clk(adcCLK), .a(adc_s1), .b(rdata), .tag_in(f_s1), .prod, .tag_out(f_m)
  );

  dcds_accumulator u_acc (
    .clk(adcCLK), .rst, .reset_val, .first(f_m.first),
    .up(f_m.ref_s), .down(f_m.sig_s), .last(f_m.last && f_m.line),
    .prod, .acc, .done(acc_done)
  );

  always_ff @(posedge adcCLK) acc_lastpix <= f_m.lastpix;

  dcds_normaliser #(.TAG_W(1)) u_norm (
    .clk(adcCLK), .rst, .in_valid(acc_done && !cfg.scope_mode), .acc, .scale,
    .tag_in(acc_lastpix), .out_valid(pix_valid), .pixel, .tag_out(pix_lastpix)
  );

  dcds_output_stage #(.PAD(PAD)) u_out (
    .clk(adcCLK), .rst, .scope_mode(cfg.scope_mode),
    .pix_valid, .pixel, .pix_lastpix, .smp(adc_q), .smp_flags(dflags),
    .pixelout(PIXELOUT), .pixelwr(PixelWR), .line_done
  );

endmodule
