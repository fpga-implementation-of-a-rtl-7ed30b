// dcds_setup_ctrl -- brings a finished host load into the ADC clock domain
// and prepares the processor for it.
//
// The host loads the registers and weights on ramclk and then raises
// dataloaded. This block passes dataloaded through a two-flop synchroniser,
// and on its rising edge copies the (by then static) register bank into the
// ADC clock domain, clears configured, starts the weight summer over the
// reference pedestal's length, feeds the sum to the reciprocal divider and,
// when the 66-cycle division returns, stores the output scaler and the
// digital-bias reset value (sum << 10) and raises configured. Computing the
// reciprocal once, as soon as the weights are in, follows the original
// design; the synchroniser, the snapshot and the order of steps are this
// design's choices. A zero weight sum is reported on sum_zero.
module dcds_setup_ctrl
  import dcds_pkg::*;
(
  input  logic                   clk,          // ADC clock
  input  logic                   rst,
  input  logic                   dataloaded,   // from the host, ramclk domain
  input  logic [NREGS*REG_W-1:0] regs,         // register bank, ramclk domain
  // weight summer
  output logic                   sum_start,
  output logic [8:0]             sum_len,
  input  logic                   sum_done,
  input  logic [SUM_W-1:0]       sum,
  // reciprocal divider
  output logic                   div_start,
  output logic [SUM_W-1:0]       div_divisor,
  input  logic                   div_valid,
  input  logic [SCALE_W-1:0]     div_quotient,
  // results
  output dcds_cfg_t              cfg,
  output logic [SCALE_W-1:0]     scale,
  output logic [ACC_W-1:0]       reset_val,
  output logic                   sum_zero,
  output logic                   configured
);

  typedef enum logic [1:0] {C_IDLE, C_SUM, C_DIV} state_e;

  state_e     state;
  logic [2:0] dl_sync;   // two synchroniser flops and one for edge detection
  logic       dl_rise;
  logic [REG_W:0] len_ref;

  assign dl_rise = dl_sync[1] && !dl_sync[2];
  assign len_ref = {1'b0, cfg.end_ref} - {1'b0, cfg.start_ref} + 1'b1;
  assign sum_len = (cfg.end_ref < cfg.start_ref || len_ref > (REG_W+1)'(PED_MAX))
                   ? 9'(PED_MAX) : len_ref[8:0];
  assign div_divisor = sum;

  always_ff @(posedge clk) begin
    if (rst) begin
      dl_sync    <= '0;
      state      <= C_IDLE;
      cfg        <= '0;
      scale      <= '0;
      reset_val  <= '0;
      sum_zero   <= 1'b0;
      configured <= 1'b0;
      sum_start  <= 1'b0;
      div_start  <= 1'b0;
    end else begin
      dl_sync   <= {dl_sync[1:0], dataloaded};
      sum_start <= 1'b0;
      div_start <= 1'b0;
      if (dl_rise) begin
        cfg        <= unpack_cfg(regs);
        configured <= 1'b0;
        sum_start  <= 1'b1;
        state      <= C_SUM;
      end else begin
        unique case (state)
          C_IDLE: ;
          C_SUM: if (sum_done) begin
            div_start <= 1'b1;
            reset_val <= ACC_W'(sum) << BIAS_SHIFT;
            sum_zero  <= (sum == '0);
            state     <= C_DIV;
          end
          C_DIV: if (div_valid) begin
            scale      <= div_quotient;
            configured <= 1'b1;
            state      <= C_IDLE;
          end
          default: state <= C_IDLE;
        endcase
      end
    end
  end

endmodule
