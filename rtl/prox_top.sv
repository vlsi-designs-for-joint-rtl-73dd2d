// prox_top: PrOX joint channel-estimation and data-detection array.
//
// Solves, for one user sending K+1 constant-modulus symbols (BPSK or QPSK)
// to a B-antenna receiver, the relaxed JED problem by iterating
//   q~ = G-hat * s^(t-1),  s^(t) = clip(rho * q~, -1, +1),  s_1^(t) = s-check
// for t = 1..t_max, and returns the signs of s^(t_max) as hard decisions.
// G-hat (N x N, N = K+1) and the start vector s^(0) come from a
// preprocessing step outside this block; the channel estimate Y*s/||s||^2
// is also formed outside.
//
// Structure: a linear array of N PEs connected as a ring (PE k passes its s
// register to PE k-1, PE 1 passes to PE N), PE 1 being the reduced PE that
// only holds s-check, and one controller whose control word is broadcast.
// Each iteration takes K+4 cycles; a problem takes t_max*(K+4) cycles when
// problems are started back to back (see prox_ctrl).
//
// Interface:
//   mem_we/mem_pe/mem_waddr/mem_wdata  write one G-hat word into PE mem_pe
//       (0-based PE index 1..N-1; word a of PE k holds G-hat(k, k+a), indices
//       taken cyclically). Write only while busy is low.
//   start (with ready high) samples s_check, s0, t_max, rho_shift, bpsk.
//   s0[k], k = 1..N-1 (0-based), is s^(0) of PE k; PE 0 uses s_check.
//   done pulses for one cycle when hard_re/hard_im hold the new decisions;
//   they are kept until the next done. Bit k (k = 1..N-1) belongs to PE k
//   (1 = negative); the known first symbol has no output.
//   acc_sat is high in a cycle in which any accumulator saturated.
//
// Follows the paper: array organisation, cyclic MVP, PE internals, number
// formats, cycle counts. This design's choices: the load port and handshake,
// run-time BPSK/QPSK selection, configurable t_max and rho at start.
module prox_top
  import prox_pkg::*;
#(
  parameter int unsigned N = 17,          // array size K+1
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned PW = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  // G-hat load port
  input  logic            mem_we,
  input  logic [PW-1:0]   mem_pe,
  input  logic [AW-1:0]   mem_waddr,
  input  cg_t             mem_wdata,
  // problem input
  input  logic            start,
  input  logic [IT_W-1:0] t_max,
  input  logic [SH_W-1:0] rho_shift,
  input  logic            bpsk,
  input  cs_t             s_check,
  input  cs_t             s0 [1:N-1],
  // results and status
  output logic            ready,
  output logic            busy,
  output logic            done,
  output logic [N-1:1]    hard_re,
  output logic [N-1:1]    hard_im,
  output logic            acc_sat
);

  ctrl_t         ctrl;
  logic [AW-1:0] rd_addr;
  cs_t           ring [N];          // s register of PE k
  logic [N-1:0]  sat;

  prox_ctrl #(.N(N)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .t_max     (t_max),
    .rho_shift (rho_shift),
    .bpsk      (bpsk),
    .ctrl      (ctrl),
    .rd_addr   (rd_addr),
    .ready     (ready),
    .busy      (busy),
    .done      (done)
  );

  prox_pe1 u_pe1 (
    .clk     (clk),
    .rst_n   (rst_n),
    .ctrl    (ctrl),
    .s_check (s_check),
    .s_next  (ring[1 % N]),
    .s_out   (ring[0])
  );

  assign sat[0] = 1'b0;

  for (genvar k = 1; k < N; k++) begin : g_pe
    prox_pe #(.N(N)) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .ctrl      (ctrl),
      .rd_addr   (rd_addr),
      .mem_we    (mem_we && (32'(mem_pe) == k)),
      .mem_waddr (mem_waddr),
      .mem_wdata (mem_wdata),
      .s0        (s0[k]),
      .s_next    (ring[(k + 1) % N]),
      .s_out     (ring[k]),
      .hard_re   (hard_re[k]),
      .hard_im   (hard_im[k]),
      .sat_evt   (sat[k])
    );
  end

  assign acc_sat = |sat;

endmodule
