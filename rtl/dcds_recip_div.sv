// dcds_recip_div -- pipelined divider computing the output scaler
// floor((2^32-1) / divisor).
//
// The processor normalises its gain to one by multiplying every pixel by
// the reciprocal of the weight sum; the reciprocal is computed once, after
// the weights are loaded, by this divider with a latency of 66 cycles, the
// latency the original design reports. The insides are this design's own:
// a fully pipelined radix-2 restoring divider, one input register, 32
// quotient-bit iterations of two stages each (trial subtraction, then
// select), and one output register: 1 + 64 + 1 = 66. A new division may
// enter every cycle. A zero divisor yields all ones.
// Timing: out_valid and quotient appear 66 cycles after in_valid.
module dcds_recip_div
  import dcds_pkg::*;
#(
  parameter logic [SCALE_W-1:0] DIVIDEND = '1   // 2^32 - 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic [SUM_W-1:0]   divisor,
  output logic               out_valid,
  output logic [SCALE_W-1:0] quotient
);

  localparam int unsigned N = SCALE_W;      // quotient bits = iterations
  localparam int unsigned RW = SUM_W + 1;   // shifted remainder width

  // State after k iterations: p_*[k]. Between iterations k and k+1: m_*[k].
  logic [SUM_W-1:0] p_rem [N+1];
  logic [N-1:0]     p_q   [N+1];   // dividend bits still to use, quotient bits shifted in
  logic [SUM_W-1:0] p_d   [N+1];
  logic             p_v   [N+1];
  logic [RW-1:0]    m_sh  [N];
  logic [RW:0]      m_dif [N];     // sign bit on top: negative = trial failed
  logic [N-1:0]     m_q   [N];
  logic [SUM_W-1:0] m_d   [N];
  logic             m_v   [N];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k <= N; k++) p_v[k] <= 1'b0;
      for (int k = 0; k < N; k++)  m_v[k] <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      p_v[0] <= in_valid;
      for (int k = 0; k < N; k++) begin
        m_v[k]   <= p_v[k];
        p_v[k+1] <= m_v[k];
      end
      out_valid <= p_v[N];
    end
  end

  always_ff @(posedge clk) begin
    p_rem[0] <= '0;
    p_q[0]   <= DIVIDEND;
    p_d[0]   <= divisor;
    for (int k = 0; k < N; k++) begin
      // stage 1: bring down the next dividend bit and try the subtraction
      m_sh[k]  <= {p_rem[k], p_q[k][N-1]};
      m_dif[k] <= {1'b0, p_rem[k], p_q[k][N-1]} - {2'b00, p_d[k]};
      m_q[k]   <= {p_q[k][N-2:0], 1'b0};
      m_d[k]   <= p_d[k];
      // stage 2: keep the difference if it did not go negative
      p_rem[k+1] <= m_dif[k][RW] ? m_sh[k][SUM_W-1:0] : m_dif[k][SUM_W-1:0];
      p_q[k+1]   <= {m_q[k][N-1:1], ~m_dif[k][RW]};
      p_d[k+1]   <= m_d[k];
    end
    quotient <= p_q[N];
  end

endmodule
