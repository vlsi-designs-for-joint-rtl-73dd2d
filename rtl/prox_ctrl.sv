// prox_ctrl: controller of the PrOX array.
//
// Sequences the iterations of the algorithm over the array of N = K+1 PEs.
// One iteration takes N+3 = K+4 cycles, numbered cyc = 0..N+2:
//   cyc 0..N-1   MVP: the s ring shifts every cycle (SSEL_SHIFT) and the
//                memories are read at address cyc+1 (word 0 is read during
//                the cycle before cyc 0)
//   cyc 2        accumulator takes the first partial sum (acc_first)
//   cyc 3..N+1   accumulator adds the remaining partial sums (acc_en),
//                cycles N and N+1 flush the three-stage MAC pipeline
//   cyc N+2      projection: every s register takes prox(rho*q~)
//                (SSEL_PROJ); in the last iteration the hard outputs are
//                captured (out_en) and done is raised one cycle later
// A problem is started by start while ready is high. ready is high when the
// array is idle and also in the projection cycle of the last iteration, so
// problems can follow each other without a gap: the new s^(0) is loaded
// (SSEL_INIT) in the same cycle in which the old result is captured. Started
// back to back, a problem takes t_max*(K+4) cycles. t_max, rho_shift and the
// BPSK mode bit are sampled at start; t_max = 0 counts as 1.
//
// Follows the paper: K+3 MAC cycles plus one projection cycle per iteration,
// t_max iterations, cyclic memory read from address 0. This design's choices:
// the start/ready/done handshake, back-to-back overlap of load and capture,
// the t_max width (5 bits; the published trade-off curves go to about 20
// iterations), a single broadcast read address for all PEs.
module prox_ctrl
  import prox_pkg::*;
#(
  parameter int unsigned N = 17,
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW = $clog2(N + 3)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [IT_W-1:0] t_max,
  input  logic [SH_W-1:0] rho_shift,
  input  logic            bpsk,
  output ctrl_t           ctrl,
  output logic [AW-1:0]   rd_addr,
  output logic            ready,
  output logic            busy,
  output logic            done        // hard outputs valid (one-cycle pulse)
);

  localparam logic [CW-1:0] CYC_PROJ = CW'(N + 2);

  logic            run_q;
  logic [CW-1:0]   cyc_q;
  logic [IT_W-1:0] it_q, tmax_q;
  logic [SH_W-1:0] rho_q;
  logic            bpsk_q;
  logic            done_q;
  logic            proj_cyc, last_it, load;

  always_comb begin
    proj_cyc = run_q && (cyc_q == CYC_PROJ);
    last_it  = (it_q + IT_W'(1) >= tmax_q);
    ready    = !run_q || (proj_cyc && last_it);
    load     = start && ready;

    ctrl           = '0;
    ctrl.bpsk      = bpsk_q;
    ctrl.rho_shift = rho_q;
    ctrl.s_sel     = SSEL_HOLD;
    rd_addr        = '0;

    if (run_q) begin
      if (cyc_q < CW'(N)) ctrl.s_sel = SSEL_SHIFT;
      if (cyc_q + CW'(1) < CW'(N)) rd_addr = AW'(cyc_q + CW'(1));
      ctrl.acc_first = (cyc_q == CW'(2));
      ctrl.acc_en    = (cyc_q >= CW'(3)) && (cyc_q <= CW'(N + 1));
      if (proj_cyc) begin
        ctrl.s_sel  = SSEL_PROJ;
        ctrl.out_en = last_it;
      end
    end
    if (load) ctrl.s_sel = SSEL_INIT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q  <= 1'b0;
      cyc_q  <= '0;
      it_q   <= '0;
      tmax_q <= IT_W'(1);
      rho_q  <= SH_W'(1);
      bpsk_q <= 1'b0;
      done_q <= 1'b0;
    end else begin
      done_q <= proj_cyc && last_it;
      if (load) begin
        run_q  <= 1'b1;
        cyc_q  <= '0;
        it_q   <= '0;
        tmax_q <= (t_max == '0) ? IT_W'(1) : t_max;
        rho_q  <= rho_shift;
        bpsk_q <= bpsk;
      end else if (proj_cyc) begin
        cyc_q <= '0;
        if (last_it) run_q <= 1'b0;
        else         it_q  <= it_q + IT_W'(1);
      end else if (run_q) begin
        cyc_q <= cyc_q + CW'(1);
      end
    end
  end

  assign busy = run_q;
  assign done = done_q;

endmodule
