// dcds_coeff_ram -- the 512 x 8-bit sample-weight memory.
//
// Words 0..255 weight the samples of the reference pedestal, words 256..511
// those of the signal pedestal. The host loads it in the ramclk domain: each
// cycle with wen high writes the low byte of the 16-bit setup bus to the
// word under an auto-incrementing write pointer, which returns to 0 on reset
// and on dataloaded (the pointer is this design's choice; the original has
// no address bus). The processing logic reads it through a second port on
// the ADC clock with one cycle of latency, as a block RAM does. The two
// pedestals never overlap, so one read port serves both. The memory itself
// is not reset; the host must load it before use.
module dcds_coeff_ram
  import dcds_pkg::*;
(
  input  logic               wclk,       // ramclk
  input  logic               rst,        // resets the write pointer only
  input  logic               wen,        // Coeff_wen
  input  logic [REG_W-1:0]   wdata,      // SetupDATAfromHost, low byte used
  input  logic               dataloaded,
  input  logic               rclk,       // ADC clock
  input  logic [COEF_AW-1:0] raddr,
  output logic [COEF_W-1:0]  rdata       // valid the cycle after raddr
);

  logic [COEF_W-1:0]  mem [COEF_DEPTH];
  logic [COEF_AW-1:0] wptr;

  always_ff @(posedge wclk) begin
    if (rst) begin
      wptr <= '0;
    end else begin
      if (wen) wptr <= wptr + 1'b1;
      if (dataloaded) wptr <= '0;
    end
  end

  always_ff @(posedge wclk) begin
    if (wen && !rst) mem[wptr] <= wdata[COEF_W-1:0];
  end

  always_ff @(posedge rclk) begin
    rdata <= mem[raddr];
  end

endmodule
