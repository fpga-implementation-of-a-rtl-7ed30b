// dcds_config_regs -- the 16 x 16-bit configuration register bank.
//
// The host streams the bank over the 16-bit setup bus in the ramclk domain.
// Each cycle with wen high writes one word and advances an internal write
// pointer, so a full load is sixteen consecutive writes starting at word 0
// (ADCPL) and ending at word 15 (Spare8). The pointer wraps after word 15 and
// returns to 0 on reset and whenever the host signals dataloaded, so every
// load starts at word 0. Addressing by an auto-incrementing pointer is this
// design's choice: the original interface has a write enable and a data bus
// but no address bus. Reset clears every register (synchronous, active high).
// Timing: a word written in cycle n is visible on regs in cycle n+1.
module dcds_config_regs
  import dcds_pkg::*;
(
  input  logic                   clk,        // ramclk
  input  logic                   rst,
  input  logic                   wen,        // Config_wen
  input  logic [REG_W-1:0]       wdata,      // SetupDATAfromHost
  input  logic                   dataloaded, // host has finished a load
  output logic [NREGS*REG_W-1:0] regs
);

  logic [3:0] wptr;

  always_ff @(posedge clk) begin
    if (rst) begin
      regs <= '0;
      wptr <= '0;
    end else begin
      if (wen) begin
        regs[wptr*REG_W +: REG_W] <= wdata;
        wptr <= wptr + 4'd1;
      end
      if (dataloaded) wptr <= '0;
    end
  end

endmodule
