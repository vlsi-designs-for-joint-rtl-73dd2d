// prox_cmac: complex-valued multiply-accumulate unit of one PE.
//
// Computes q~_k = sum_c G-hat(k, k+c) * s_(k+c) one term per clock cycle,
// as in the published PE diagram:
//   stage 1  operand register for the G-hat word read from the memory (the s
//            operand arrives already registered from the PE's s register)
//   stage 2  four real 12x6-bit multipliers, 18-bit products registered as
//            15 bits with 11 fraction bits (the 3 lowest bits are dropped)
//   stage 3  real part  = Re(g)Re(s) - Im(g)Im(s)   (15-bit, wraps around)
//            imag. part = Re(g)Im(s) + Im(g)Re(s)   (15-bit, wraps around)
//   accum.   15-bit saturating accumulators
// The G-hat word of term c must be on g_in in cycle c-1 (it is registered)
// and the s value on s_in in cycle c; the term reaches the accumulator input
// in cycle c+2. acc_first loads the
// accumulator with the incoming partial sum, acc_en adds it (saturating);
// with neither the accumulator holds. With N terms presented in cycles
// 0..N-1, acc_first in cycle 2 and acc_en in cycles 3..N+1, the result is on
// acc from cycle N+2 on (N+2 = K+3 MAC cycles per iteration, as published).
//
// Follows the paper: widths, wrap-around adders, saturating accumulators,
// three pipeline stages. This design's choices: truncation (not rounding) of
// the products, one register serving as both accumulator and MAC output
// register (the diagram draws the feedback register and an output register,
// which always hold the same value), active-low asynchronous reset.
module prox_cmac
  import prox_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  cg_t  g_in,        // G-hat word from the memory (unregistered)
  input  cs_t  s_in,        // s operand (registered in the PE)
  input  logic acc_first,
  input  logic acc_en,
  output ca_t  acc,         // q~_k, 15 bit, 11 fraction bits
  output logic sat_evt      // an accumulator saturated this cycle
);

  cg_t g_q;                       // stage 1
  a_t  p_rr, p_ii, p_ri, p_ir;    // stage 2
  ca_t sum_q;                     // stage 3

  p_t m_rr, m_ii, m_ri, m_ir;
  logic signed [A_W:0] nxt_re, nxt_im;

  always_comb begin
    m_rr = p_t'(g_q.re) * p_t'(s_in.re);
    m_ii = p_t'(g_q.im) * p_t'(s_in.im);
    m_ri = p_t'(g_q.re) * p_t'(s_in.im);
    m_ir = p_t'(g_q.im) * p_t'(s_in.re);
    nxt_re = (A_W+1)'(acc.re) + (A_W+1)'(sum_q.re);
    nxt_im = (A_W+1)'(acc.im) + (A_W+1)'(sum_q.im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q   <= '0;
      p_rr  <= '0;
      p_ii  <= '0;
      p_ri  <= '0;
      p_ir  <= '0;
      sum_q <= '0;
      acc   <= '0;
    end else begin
      g_q   <= g_in;
      p_rr  <= m_rr[P_W-1:P_W-A_W];
      p_ii  <= m_ii[P_W-1:P_W-A_W];
      p_ri  <= m_ri[P_W-1:P_W-A_W];
      p_ir  <= m_ir[P_W-1:P_W-A_W];
      sum_q.re <= p_rr - p_ii;     // wraps around
      sum_q.im <= p_ri + p_ir;     // wraps around
      if (acc_first) begin
        acc <= sum_q;
      end else if (acc_en) begin
        acc.re <= sat_a(nxt_re);
        acc.im <= sat_a(nxt_im);
      end
    end
  end

  assign sat_evt = acc_en && !acc_first &&
                   ((nxt_re != (A_W+1)'(sat_a(nxt_re))) ||
                    (nxt_im != (A_W+1)'(sat_a(nxt_im))));

endmodule
