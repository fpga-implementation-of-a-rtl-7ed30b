// dcds_pkg -- types and constants shared by the DCDS (digital correlated
// double sampling) video processor.
//
// The register map follows the processor's configuration bank: sixteen
// 16-bit registers, of which the first eight set the pixel timing and the
// last eight are spare. Word 6 holds the end of the signal pedestal; the
// register map printed with the original design labels it a second
// "End_ref", which is read here as a misprint for End_sig. Spare1 (word 8)
// bit 0 is this design's own choice for selecting oscilloscope mode.
// Coefficient bank: 512 x 8-bit weights, 0..255 for the reference pedestal
// and 256..511 for the signal pedestal.
package dcds_pkg;

  localparam int unsigned ADC_W      = 16;   // ADC sample width
  localparam int unsigned COEF_W     = 8;    // weight width (0..255)
  localparam int unsigned PED_MAX    = 256;  // samples per pedestal, at most
  localparam int unsigned COEF_DEPTH = 512;  // 2 x PED_MAX weights
  localparam int unsigned COEF_AW    = 9;
  localparam int unsigned PROD_W     = 24;   // ADC_W + COEF_W
  localparam int unsigned ACC_W      = 32;   // up/down accumulator
  localparam int unsigned SUM_W      = 16;   // sum of one pedestal's weights
  localparam int unsigned SCALE_W    = 32;   // output scaler (2^32-1)/sum
  localparam int unsigned PIX_W      = 18;   // 16 integer + 2 fraction bits
  localparam int unsigned REG_W      = 16;   // configuration register width
  localparam int unsigned NREGS      = 16;
  localparam int unsigned BIAS_SHIFT = 10;   // digital bias = 1024 ADU
  localparam int unsigned FSM_GAP    = 5;    // cycles the pixel FSM needs at the end of a pixel

  typedef enum logic [3:0] {
    R_ADCPL     = 4'd0,   // ADC pipeline length, in ADC clocks
    R_NSERIAL   = 4'd1,   // pixels per image line
    R_DMP       = 4'd2,   // position of the charge dump event
    R_START_REF = 4'd3,
    R_END_REF   = 4'd4,
    R_START_SIG = 4'd5,
    R_END_SIG   = 4'd6,
    R_L_PIXEL   = 4'd7,   // pixel period, in ADC clocks
    R_SPARE1    = 4'd8    // bit 0: oscilloscope mode
  } reg_idx_e;

  // Configuration as seen by the processing logic.
  typedef struct packed {
    logic [REG_W-1:0] adcpl;
    logic [REG_W-1:0] nserial;
    logic [REG_W-1:0] dmp;
    logic [REG_W-1:0] start_ref;
    logic [REG_W-1:0] end_ref;
    logic [REG_W-1:0] start_sig;
    logic [REG_W-1:0] end_sig;
    logic [REG_W-1:0] l_pixel;
    logic             scope_mode;
  } dcds_cfg_t;

  // Per-sample control flags produced by the pixel sequencer and carried
  // alongside the ADC data through the processing pipeline.
  typedef struct packed {
    logic        line;    // sample belongs to an active line
    logic        first;   // first sample of a pixel: reset the accumulator
    logic        ref_s;   // sample lies in the reference pedestal
    logic        sig_s;   // sample lies in the signal pedestal
    logic        last;    // last sample of the signal pedestal
    logic        lastpix; // sample belongs to the last pixel of the line
    logic        eol;     // last sample of the line
    logic [7:0]  idx;     // position of the sample within its pedestal
  } smp_flags_t;

  function automatic dcds_cfg_t unpack_cfg(input logic [NREGS*REG_W-1:0] regs);
    dcds_cfg_t c;
    c.adcpl      = regs[R_ADCPL*REG_W     +: REG_W];
    c.nserial    = regs[R_NSERIAL*REG_W   +: REG_W];
    c.dmp        = regs[R_DMP*REG_W       +: REG_W];
    c.start_ref  = regs[R_START_REF*REG_W +: REG_W];
    c.end_ref    = regs[R_END_REF*REG_W   +: REG_W];
    c.start_sig  = regs[R_START_SIG*REG_W +: REG_W];
    c.end_sig    = regs[R_END_SIG*REG_W   +: REG_W];
    c.l_pixel    = regs[R_L_PIXEL*REG_W   +: REG_W];
    c.scope_mode = regs[R_SPARE1*REG_W];
    return c;
  endfunction

endpackage
