// prox_proj: one real-valued module of the projection unit.
//
// Computes clip(rho*q, -1, +1), the projection of one real dimension of
// rho*q~_k onto the convex hull [-1,+1] of the BPSK/QPSK constellation.
// Instead of comparing rho*q with +-1, it forms q-1/rho and q+1/rho with
// 15-bit saturating adders and looks at their sign bits:
//   q-1/rho >= 0  -> +1
//   q+1/rho <  0  -> -1
//   otherwise     -> rho*q, an arithmetic left shift of q by rho_shift,
//                    of which 6 bits (3 fraction bits) are kept
// rho*q is formed in parallel with the two additions. The module is purely
// combinational; the PE registers its output (the s register), which gives
// the one cycle the projection takes.
//
// Follows the paper: rho a power of two (4-bit shift amount), 1/rho as a
// 12-bit number with 11 fraction bits, 15-bit saturating adders, 6-bit
// output selected by the two sign bits. This design's choices: 1/rho is
// derived from the shift amount (2^11 >> rho_shift) rather than loaded
// separately, and the 6 kept bits of the shifted value are those at weights
// 2^2..2^-3, i.e. the s format (the paper says "the 6 most significant bits",
// which for a 15-bit value with 11 fraction bits would give 2 fraction bits
// instead of the 3 it states for s; the 3 fraction bits were followed).
// rho_shift = 0 (rho = 1) is outside the published range (rho > 1) and gives
// 1/rho = 2^11, which does not fit 12 bits; it is treated as rho_shift = 1.
module prox_proj
  import prox_pkg::*;
(
  input  a_t              q,          // 15 bit, 11 fraction bits
  input  logic [SH_W-1:0] rho_shift,
  output s_t              s,          // 6 bit, 3 fraction bits
  output logic            clip_pos,   // output is +1 (clipped)
  output logic            clip_neg    // output is -1 (clipped)
);

  logic [SH_W-1:0]          sh;
  logic signed [R_W-1:0]    inv_rho;
  a_t                       q_minus, q_plus, q_shift;

  always_comb begin
    sh       = (rho_shift == '0) ? SH_W'(1) : rho_shift;
    inv_rho  = R_W'((1 << G_FRAC) >> sh);
    q_minus  = sat_a((A_W+1)'(q) - (A_W+1)'(inv_rho));
    q_plus   = sat_a((A_W+1)'(q) + (A_W+1)'(inv_rho));
    q_shift  = q <<< sh;
    clip_pos = !q_minus[A_W-1];
    clip_neg = !clip_pos && q_plus[A_W-1];
    if (clip_pos)      s = S_POS1;
    else if (clip_neg) s = S_NEG1;
    else               s = q_shift[A_FRAC+S_W-S_FRAC-1 : A_FRAC-S_FRAC];
  end

endmodule
