// prox_pe: processing element k (k = 2..N) of the PrOX linear array.
//
// Each PE owns one entry s_k of the iterate and computes one entry of
//   q~ = G-hat * s^(t-1)   and   s_k^(t) = prox(rho * q~_k).
// Its s register is one stage of a ring shift register: in every MVP cycle
// it passes its value to PE k-1 (port s_out) and takes the value of PE k+1
// (port s_next), so all entries of s^(t-1) pass every PE in N cycles without
// any wide fan-out. The G-hat memory holds row k in cyclically permuted order
// so that word c meets s_(k+c) in cycle c. The complex MAC accumulates the
// N products; the two projection modules (real and imaginary part) clip
// rho*q~_k, and the result is written back into the s register for the next
// iteration. After the last iteration the sign bits of the projection outputs
// are captured as the hard decisions (bit = 1 means -1).
//
// The s register's input multiplexer selects, under ctrl.s_sel, the initial
// value s_k^(0), the neighbour's value, the projection result, or holds.
// ctrl.bpsk forces the imaginary part of s to zero (BPSK operation on the
// QPSK datapath). Timing and control come from prox_ctrl: K+4 = N+3 cycles
// per iteration.
//
// Follows the paper: structure of Fig. 1 (right) with memory, MAC unit,
// projection unit, ring of s registers, hard outputs from sign bits. This
// design's choices: the controller's control word and memory read address
// are broadcast to every PE; the BPSK mode bit (the paper removes the
// imaginary datapath for a BPSK-only design); the memory write port.
module prox_pe
  import prox_pkg::*;
#(
  parameter int unsigned N = 17,
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ctrl_t         ctrl,
  input  logic [AW-1:0] rd_addr,
  // G-hat memory write port
  input  logic          mem_we,
  input  logic [AW-1:0] mem_waddr,
  input  cg_t           mem_wdata,
  // iterate ring
  input  cs_t           s0,        // s_k^(0)
  input  cs_t           s_next,    // s register of PE k+1 (PE 1 for k = N)
  output cs_t           s_out,     // s register of this PE, to PE k-1
  // hard outputs
  output logic          hard_re,   // sign of Re(s_k), 1 = -1
  output logic          hard_im,   // sign of Im(s_k), 1 = -1
  output logic          sat_evt    // an accumulator saturated (monitor)
);

  cs_t  s_q, s_proj;
  cg_t  g_rd;
  ca_t  acc;
  s_t   pr_re, pr_im;
  logic [1:0] clip_pos, clip_neg;   // {im, re}; the sign bits carry the same
                                    // information to the s register

  prox_ghat_mem #(.DEPTH(N)) u_mem (
    .clk   (clk),
    .we    (mem_we),
    .waddr (mem_waddr),
    .wdata (mem_wdata),
    .raddr (rd_addr),
    .rdata (g_rd)
  );

  prox_cmac u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .g_in      (g_rd),
    .s_in      (s_q),
    .acc_first (ctrl.acc_first),
    .acc_en    (ctrl.acc_en),
    .acc       (acc),
    .sat_evt   (sat_evt)
  );

  prox_proj u_proj_re (
    .q         (acc.re),
    .rho_shift (ctrl.rho_shift),
    .s         (pr_re),
    .clip_pos  (clip_pos[0]),
    .clip_neg  (clip_neg[0])
  );

  prox_proj u_proj_im (
    .q         (acc.im),
    .rho_shift (ctrl.rho_shift),
    .s         (pr_im),
    .clip_pos  (clip_pos[1]),
    .clip_neg  (clip_neg[1])
  );

  always_comb begin
    s_proj.re = pr_re;
    s_proj.im = ctrl.bpsk ? s_t'(0) : pr_im;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q     <= '0;
      hard_re <= 1'b0;
      hard_im <= 1'b0;
    end else begin
      unique case (ctrl.s_sel)
        SSEL_INIT:  s_q <= s0;
        SSEL_SHIFT: s_q <= s_next;
        SSEL_PROJ:  s_q <= s_proj;
        default:    s_q <= s_q;
      endcase
      if (ctrl.out_en) begin
        hard_re <= s_proj.re[S_W-1];
        hard_im <= s_proj.im[S_W-1];
      end
    end
  end

  assign s_out = s_q;

endmodule
