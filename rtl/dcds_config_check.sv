// dcds_config_check -- combinational consistency check of the pixel timing.
//
// Flags a configuration the processor cannot run. Rules taken from the
// original design: the two pedestals have equal length, they do not overlap,
// and the last signal sample lies more than FSM_GAP (5) cycles before the
// end of the pixel, which is the time the pixel sequencer needs to become
// triggerable again. Rules added here because the hardware relies on them:
// each pedestal starts no later than it ends and holds at most 256 samples
// (the size of its half of the weight memory), the reference pedestal comes
// first, the ADC pipeline length fits the alignment delay line
// (adcpl <= MAX_ADCPL), the line has at least one pixel, and the dump event
// lies inside the pixel. Pedestal bounds are inclusive sample counts from
// the pixel start (count 0). Purely combinational: no clock, no latency.
module dcds_config_check
  import dcds_pkg::*;
#(
  parameter int unsigned MAX_ADCPL = 64
) (
  input  dcds_cfg_t cfg,
  output logic      err_len,      // pedestal lengths differ or out of range
  output logic      err_overlap,  // pedestals overlap or are out of order
  output logic      err_end,      // last signal sample too close to pixel end
  output logic      err_other,    // ADCPL, NSERIAL or DMP out of range
  output logic      error
);

  logic [REG_W:0] len_ref, len_sig;   // one bit wider: no wrap on subtraction

  always_comb begin
    len_ref = {1'b0, cfg.end_ref} - {1'b0, cfg.start_ref} + 1'b1;
    len_sig = {1'b0, cfg.end_sig} - {1'b0, cfg.start_sig} + 1'b1;

    err_len = (cfg.end_ref < cfg.start_ref) || (cfg.end_sig < cfg.start_sig)
           || (len_ref != len_sig) || (len_ref > (REG_W+1)'(PED_MAX));

    err_overlap = (cfg.start_sig <= cfg.end_ref);

    err_end = ({1'b0, cfg.end_sig} + (REG_W+1)'(FSM_GAP) >= {1'b0, cfg.l_pixel});

    err_other = (cfg.adcpl > REG_W'(MAX_ADCPL)) || (cfg.nserial == '0)
             || (cfg.dmp >= cfg.l_pixel);

    error = err_len || err_overlap || err_end || err_other;
  end

endmodule
