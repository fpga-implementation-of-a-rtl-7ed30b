// dcds_coeff_sum -- sums the reference-pedestal weights once after a load.
//
// On a start pulse it reads weights 0..len-1 of the reference half of the
// weight memory, one per cycle, and adds them into a 16-bit sum (256 weights
// of at most 255 fit). Summing the reference half only, over the samples the
// pedestal actually uses, follows the block diagram of the original design,
// where the summer takes the reference weights and feeds both the divider
// and the digital-bias reset value; the two pedestals' sums are expected to
// be equal. Sequential read over the memory's one read port is this design's
// choice. Timing: done pulses len+2 cycles after start (one cycle of memory
// latency, one to register the last addition); sum is stable from then on.
module dcds_coeff_sum
  import dcds_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  logic [8:0]         len,     // 1..256 samples in the pedestal
  output logic [COEF_AW-1:0] raddr,
  input  logic [COEF_W-1:0]  rdata,   // weight at raddr of the previous cycle
  output logic               busy,
  output logic               done,
  output logic [SUM_W-1:0]   sum
);

  logic [8:0] cnt;        // next address to issue
  logic       rd_valid;   // rdata holds a weight to add
  logic       rd_last;

  assign raddr = {1'b0, cnt[7:0]};

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      sum      <= '0;
      rd_valid <= 1'b0;
      rd_last  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        cnt      <= '0;
        busy     <= 1'b1;
        sum      <= '0;
        rd_valid <= 1'b0;
        rd_last  <= 1'b0;
      end else if (busy) begin
        rd_valid <= (cnt < len);
        rd_last  <= (cnt == len - 9'd1);
        if (cnt < len) cnt <= cnt + 9'd1;
        if (rd_valid) sum <= sum + SUM_W'(rdata);
        if (rd_valid && rd_last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
