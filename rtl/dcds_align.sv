// dcds_align -- programmable delay that aligns the sequencer's sample flags
// with the ADC data.
//
// A pipelined ADC delivers each sample several clocks after it was taken.
// The ADCPL register states that delay. This block delays the flags that
// the sequencer produces on its time line by a programmed number of cycles;
// the processor programs ADCPL plus its two input registers. The flag that
// describes sample k then meets sample k at the processor's input register. Delaying the flags rather than the data is this design's
// choice; the original gives only the register. A shift register of
// MAX_DELAY stages is tapped at the programmed delay; delay 0 passes the
// flags straight through, and delays above MAX_DELAY are refused by the
// configuration check. Register contents are cleared on reset, so no stale
// flags come out after it.
module dcds_align #(
  parameter int unsigned W         = 8,
  parameter int unsigned MAX_DELAY = 64
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [15:0]  delay,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  logic [W-1:0] sr [MAX_DELAY];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < MAX_DELAY; k++) sr[k] <= '0;
    end else begin
      sr[0] <= din;
      for (int k = 1; k < MAX_DELAY; k++) sr[k] <= sr[k-1];
    end
  end

  localparam int unsigned IW = (MAX_DELAY > 1) ? $clog2(MAX_DELAY) : 1;

  logic [15:0] tap;

  always_comb begin
    tap = delay - 16'd1;
    if (delay == '0)                    dout = din;
    else if (delay > 16'(MAX_DELAY))    dout = sr[MAX_DELAY-1];
    else                                dout = sr[tap[IW-1:0]];
  end

endmodule
