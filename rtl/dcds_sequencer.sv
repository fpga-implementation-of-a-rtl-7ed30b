// dcds_sequencer -- line and pixel sequencer.
//
// When the processor is ready and a line trigger arrives, it runs one image
// line of NSERIAL pixels, each L_pixel ADC clocks long, counting the clocks
// of the current pixel from 0. For every clock it emits the control flags
// of the sample taken at that instant (first sample of the pixel, inside
// the reference pedestal Start_ref..End_ref, inside the signal pedestal
// Start_sig..End_sig, last signal sample, end of line, and the sample's
// index within its pedestal), together with the two triggers for the
// external CCD clock generator: start_of_pixel at count 0 and dump_event at
// count DMP. Pixels follow each other without a gap. After the last pixel
// the sequencer waits (DRAIN) until the output stage reports that the
// line's last result has been written (the report may also arrive while
// the last pixel is still being clocked, when its signal pedestal ends
// early), and only then becomes triggerable again, so lineactive covers the
// processing tail as well. The pixel
// timing registers and triggers follow the original design; the
// three-state machine, the inclusive pedestal bounds and the drain wait are
// this design's choices.
// Timing: all outputs are registered; the flags and triggers for count k
// appear in the same cycle, one cycle after the counter holds k.
module dcds_sequencer
  import dcds_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  dcds_cfg_t  cfg,
  input  logic       enable,      // processor configured and error-free
  input  logic       trig,        // one-cycle line trigger
  input  logic       line_done,   // last result of the line has been written
  output logic       idle,        // triggerable
  output logic       lineactive,
  output logic       pixactive,
  output logic       start_of_pixel,
  output logic       dump_event,
  output smp_flags_t flags
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e           state;
  logic [REG_W-1:0] cnt, pix;
  logic             done_seen;   // line_done came while the last pixel still ran
  smp_flags_t       f;
  logic             in_ref, in_sig;

  always_comb begin
    in_ref    = (cnt >= cfg.start_ref) && (cnt <= cfg.end_ref);
    in_sig    = (cnt >= cfg.start_sig) && (cnt <= cfg.end_sig);
    f.line    = (state == S_RUN);
    f.first   = f.line && (cnt == '0);
    f.ref_s   = f.line && in_ref;
    f.sig_s   = f.line && in_sig && !in_ref;
    f.last    = f.line && (cnt == cfg.end_sig);
    f.lastpix = f.line && (pix == cfg.nserial - 16'd1);
    f.eol     = f.lastpix && (cnt == cfg.l_pixel - 16'd1);
    f.idx     = in_ref ? 8'(cnt - cfg.start_ref) : 8'(cnt - cfg.start_sig);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      cnt       <= '0;
      pix       <= '0;
      done_seen <= 1'b0;
    end else begin
      if (line_done) done_seen <= 1'b1;
      unique case (state)
        S_IDLE: if (enable && trig) begin
          state     <= S_RUN;
          cnt       <= '0;
          pix       <= '0;
          done_seen <= 1'b0;
        end
        S_RUN: begin
          if (cnt == cfg.l_pixel - 16'd1) begin
            cnt <= '0;
            if (pix == cfg.nserial - 16'd1) state <= S_DRAIN;
            else pix <= pix + 16'd1;
          end else begin
            cnt <= cnt + 16'd1;
          end
        end
        S_DRAIN: if (line_done || done_seen) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      flags          <= '0;
      pixactive      <= 1'b0;
      start_of_pixel <= 1'b0;
      dump_event     <= 1'b0;
    end else begin
      flags          <= f;
      pixactive      <= f.line;
      start_of_pixel <= f.first;
      dump_event     <= f.line && (cnt == cfg.dmp);
    end
  end

  assign idle       = (state == S_IDLE);
  assign lineactive = !idle;

endmodule
