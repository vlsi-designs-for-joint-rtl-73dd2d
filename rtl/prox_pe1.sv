// prox_pe1: processing element 1 of the PrOX linear array.
//
// The first entry of the transmit vector is a known symbol s-check, so PE 1
// needs no memory, MAC or projection. It holds s-check in flip-flops and has
// an s register that is part of the ring: during the MVP it first sends
// s-check to PE N and then forwards whatever it receives from PE 2; at the
// end of every iteration (ctrl.s_sel = SSEL_PROJ) its s register is forced
// back to s-check, which is step s_1^(t) = s-check of the algorithm.
// On SSEL_INIT both flip-flop sets load the s_check input, so a new problem
// may use a new known symbol.
//
// Follows the paper: "two multiplexers and flip-flops that store" s-check.
// This design's choice: s-check is an input captured at the start of each
// problem rather than a constant.
module prox_pe1
  import prox_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  ctrl_t ctrl,
  input  cs_t   s_check,   // known first symbol, sampled on SSEL_INIT
  input  cs_t   s_next,    // s register of PE 2
  output cs_t   s_out      // to PE N
);

  cs_t chk_q, s_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chk_q <= '0;
      s_q   <= '0;
    end else begin
      if (ctrl.s_sel == SSEL_INIT) chk_q <= s_check;
      unique case (ctrl.s_sel)
        SSEL_INIT:  s_q <= s_check;
        SSEL_SHIFT: s_q <= s_next;
        SSEL_PROJ:  s_q <= chk_q;
        default:    s_q <= s_q;
      endcase
    end
  end

  assign s_out = s_q;

endmodule
