// tb_prox_top: end-to-end test of the PrOX array at its default size.
//
// Loads random G-hat matrices through the memory write port, issues
// problems with random s^(0), s-check, t_max, rho and modulation, partly back
// to back and partly from idle, and compares the hard decisions with the
// integer reference model in prox_ref_pkg. It also checks that every problem
// finishes exactly t_max*(K+4) cycles after it was accepted, and that the
// array reaches each of its mechanisms at least once: start from idle, start
// back to back, clipping to +1 and to -1, the linear (rho*q) branch,
// accumulator saturation, BPSK and QPSK mode, more than one iteration and a
// reload of G-hat between problems.
module tb_prox_top;
  import prox_pkg::*;
  import prox_ref_pkg::*;

  localparam int N = 17;

  logic            clk = 1'b0;
  logic            rst_n;
  logic            mem_we;
  logic [$clog2(N)-1:0] mem_pe;
  logic [$clog2(N)-1:0] mem_waddr;
  cg_t             mem_wdata;
  logic            start;
  logic [IT_W-1:0] t_max;
  logic [SH_W-1:0] rho_shift;
  logic            bpsk;
  cs_t             s_check;
  cs_t             s0 [1:N-1];
  logic            ready, busy, done, acc_sat;
  logic [N-1:1]    hard_re, hard_im;

  prox_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int gre[MAXN][MAXN], gim[MAXN][MAXN];

  typedef struct {
    logic [N-1:0] hre, him;
    int           done_cyc;
  } exp_t;
  exp_t expq[$];

  stats_t st;
  int n_idle_start = 0, n_b2b = 0, n_bpsk = 0, n_qpsk = 0, n_multi = 0;
  int n_reload = 0, n_sat_cycles = 0, n_done = 0;

  always @(negedge clk) if (rst_n && acc_sat) n_sat_cycles++;

  // result monitor
  always @(negedge clk) begin
    if (rst_n && done) begin
      exp_t e;
      n_done++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected done at cycle %0d", cyc);
      end else begin
        e = expq.pop_front();
        checks += 3;
        if (cyc != e.done_cyc) begin
          failures++;
          $display("done at cycle %0d, expected %0d", cyc, e.done_cyc);
        end
        if (hard_re[N-1:1] !== e.hre[N-1:1]) begin
          failures++;
          $display("hard_re %b expected %b", hard_re, e.hre);
        end
        if (hard_im[N-1:1] !== e.him[N-1:1]) begin
          failures++;
          $display("hard_im %b expected %b", hard_im, e.him);
        end
      end
    end
  end

  function automatic int rnd(input int range);   // uniform in [-range, range]
    return int'($urandom_range(2 * range)) - range;
  endfunction

  task automatic load_g(input int range);
    for (int k = 0; k < N; k++)
      for (int j = 0; j < N; j++) begin
        gre[k][j] = rnd(range);
        gim[k][j] = rnd(range);
      end
    for (int k = 1; k < N; k++)
      for (int a = 0; a < N; a++) begin
        @(negedge clk);
        mem_we       = 1'b1;
        mem_pe       = k[$clog2(N)-1:0];
        mem_waddr    = a[$clog2(N)-1:0];
        mem_wdata.re = g_t'(gre[k][(k + a) % N]);
        mem_wdata.im = g_t'(gim[k][(k + a) % N]);
      end
    @(negedge clk);
    mem_we = 1'b0;
    n_reload++;
  endtask

  // Issue one problem; returns after it has been accepted.
  task automatic issue(input int tm, input int sh, input bit bp);
    int s0re[MAXN], s0im[MAXN], sre[MAXN], sim[MAXN], chre, chim;
    exp_t e;
    bit was_busy;
    chre = $urandom_range(1) ? 8 : -8;
    chim = bp ? 0 : ($urandom_range(1) ? 8 : -8);
    s0re[0] = 0; s0im[0] = 0;
    for (int k = 1; k < N; k++) begin
      s0re[k] = rnd(8);
      s0im[k] = bp ? 0 : rnd(8);
    end
    run(N, tm, sh, bp, gre, gim, s0re, s0im, chre, chim, sre, sim, st);
    e.hre = '0; e.him = '0;
    for (int k = 1; k < N; k++) begin
      e.hre[k] = (sre[k] < 0);
      e.him[k] = (sim[k] < 0);
    end
    // drive at the negative edge
    if (!(clk == 1'b0)) @(negedge clk);
    start     = 1'b1;
    t_max     = IT_W'(tm);
    rho_shift = SH_W'(sh);
    bpsk      = bp;
    s_check.re = s_t'(chre);
    s_check.im = s_t'(chim);
    for (int k = 1; k < N; k++) begin
      s0[k].re = s_t'(s0re[k]);
      s0[k].im = s_t'(s0im[k]);
    end
    while (!ready) @(negedge clk);
    was_busy = busy;
    e.done_cyc = cyc + 1 + ((tm == 0) ? 1 : tm) * (N + 3);
    expq.push_back(e);
    if (was_busy) n_b2b++; else n_idle_start++;
    if (bp) n_bpsk++; else n_qpsk++;
    if (tm > 1) n_multi++;
    @(negedge clk);
    start = 1'b0;
    for (int k = 1; k < N; k++) s0[k] = '{re: s_t'($urandom), im: s_t'($urandom)};
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy || expq.size() != 0) @(negedge clk);
  endtask

  initial begin
    st = '{default: 0};
    rst_n = 1'b0; mem_we = 1'b0; mem_pe = '0; mem_waddr = '0; mem_wdata = '0;
    start = 1'b0; t_max = '0; rho_shift = '0; bpsk = 1'b0; s_check = '0;
    for (int k = 1; k < N; k++) s0[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // batch 1: small G-hat entries (mixture of clipped and linear outputs)
    load_g(200);
    for (int i = 0; i < 12; i++)
      issue($urandom_range(1, 5), $urandom_range(1, 4), $urandom_range(1));
    wait_idle();
    // batch 2: problems with idle gaps, t_max = 0 treated as 1
    issue(0, 2, 0);
    wait_idle();
    repeat (7) @(negedge clk);
    issue(3, 3, 1);
    wait_idle();
    // batch 3: full-range entries, accumulators saturate
    load_g(2047);
    for (int i = 0; i < 6; i++)
      issue($urandom_range(1, 3), $urandom_range(1, 6), $urandom_range(1));
    wait_idle();
    // batch 4: typical operating point, t_max = 3, QPSK, rho = 4
    load_g(600);
    for (int i = 0; i < 6; i++) issue(3, 2, 0);
    wait_idle();
    repeat (5) @(negedge clk);

    checks += 10;
    if (n_done != 26)       begin failures++; $display("done count %0d", n_done); end
    if (n_idle_start == 0)  begin failures++; $display("no start from idle"); end
    if (n_b2b == 0)         begin failures++; $display("no back-to-back start"); end
    if (st.n_clip_pos == 0) begin failures++; $display("no +1 clipping"); end
    if (st.n_clip_neg == 0) begin failures++; $display("no -1 clipping"); end
    if (st.n_linear == 0)   begin failures++; $display("no linear projection"); end
    if (st.n_sat == 0 || n_sat_cycles == 0)
                            begin failures++; $display("no accumulator saturation"); end
    if (n_bpsk == 0 || n_qpsk == 0) begin failures++; $display("mode not exercised"); end
    if (n_multi == 0)       begin failures++; $display("no multi-iteration run"); end
    if (n_reload < 2)       begin failures++; $display("no G-hat reload"); end
    $display("mechanisms: idle_start=%0d back_to_back=%0d clip_pos=%0d clip_neg=%0d linear=%0d sat(model)=%0d sat_cycles=%0d bpsk=%0d qpsk=%0d multi_iter=%0d reloads=%0d",
             n_idle_start, n_b2b, st.n_clip_pos, st.n_clip_neg, st.n_linear, st.n_sat,
             n_sat_cycles, n_bpsk, n_qpsk, n_multi, n_reload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
