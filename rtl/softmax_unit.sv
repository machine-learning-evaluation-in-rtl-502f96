// softmax_unit: pipelined softmax over N signed Q6.10 logits.
//
// Four register stages, so out_valid follows in_valid by exactly 4 cycles:
//   1. register the logits and their maximum m;
//   2. e_i = exp(z_i - m), computed as 2**(-y) with y = (m - z_i)*log2(e):
//      the integer part of y is a right shift, the fractional part f uses the
//      chord 2**(-f) ~ 1 - f/2 (error below 6 %); e_i is Q2.14, at most 1.0;
//   3. register the sum of the e_i (at least 1.0, since the maximum gives 1.0);
//   4. p_i = e_i / sum as Q2.14 (1.0 = 16384), one divider per class.
// Subtracting the maximum keeps every exponent at or below 1, so no
// overflow can occur. The outputs preserve the order of the logits.
//
// The paper only says the networks end in softmax. The max-subtraction,
// exponential approximation, formats and pipelining are choices of this
// design (hls4ml uses lookup tables for the same purpose).
module softmax_unit
  import gep_pkg::*;
#(
  parameter int unsigned N = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  sword_t logit [N],
  output logic   out_valid,
  output word_t  prob  [N]
);
  localparam int unsigned LOG2E_Q14 = 23637;   // log2(e) * 2**14
  localparam int unsigned SUMW      = $clog2(N) + 16;

  logic [3:0]           vld;
  sword_t               z_q [N];
  sword_t               m_q;
  logic [15:0]          e_q  [N];
  logic [15:0]          e2_q [N];
  logic [SUMW-1:0]      sum_q;

  // combinational maximum of the incoming logits
  sword_t m_c;
  always_comb begin
    m_c = logit[0];
    for (int i = 1; i < N; i++) if (logit[i] > m_c) m_c = logit[i];
  end

  // exp(-d), d = m - z >= 0 in Q.10, result Q2.14
  function automatic logic [15:0] exp_neg(input logic [16:0] d);
    logic [33:0] y;
    logic [9:0]  f;
    logic [23:0] n;
    logic [15:0] mant;
    y    = (34'(d) * 34'(LOG2E_Q14)) >> 14;   // Q.10
    f    = y[9:0];
    n    = y[33:10];
    mant = 16'(16384 - (int'(f) << 3));       // 1 - f/2 in Q2.14
    if (n >= 24'd15) return 16'd0;
    return mant >> n[3:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld   <= '0;
      m_q   <= '0;
      sum_q <= '0;
      for (int i = 0; i < N; i++) begin
        z_q[i]  <= '0;
        e_q[i]  <= '0;
        e2_q[i] <= '0;
        prob[i] <= '0;
      end
    end else begin
      vld <= {vld[2:0], in_valid};
      // stage 1
      z_q <= logit;
      m_q <= m_c;
      // stage 2
      for (int i = 0; i < N; i++)
        e_q[i] <= exp_neg(17'(signed'({m_q[15], m_q}) - signed'({z_q[i][15], z_q[i]})));
      // stage 3
      begin
        logic [SUMW-1:0] s;
        s = '0;
        for (int i = 0; i < N; i++) s += SUMW'(e_q[i]);
        sum_q <= s;
      end
      e2_q <= e_q;
      // stage 4
      for (int i = 0; i < N; i++)
        prob[i] <= (sum_q == '0) ? 16'd0 : 16'((32'(e2_q[i]) << PROB_FRAC) / 32'(sum_q));
    end
  end

  assign out_valid = vld[3];
endmodule
