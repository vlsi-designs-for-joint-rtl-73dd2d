// prox_size_run: test driver for one prox_top instance of array size N.
// Loads a random G-hat, runs a set of problems (t_max 1..3, BPSK and QPSK,
// back to back), compares the hard outputs with the reference model and
// checks that each problem completes t_max*(N+3) = t_max*(K+4) cycles after
// its load edge. Raises finished when done; checks/failures count the result.
module prox_size_run
  import prox_pkg::*;
  import prox_ref_pkg::*;
#(
  parameter int N = 5
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   min_latency,
  output bit   finished
);

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

  prox_top #(.N(N)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int gre[MAXN][MAXN], gim[MAXN][MAXN];

  typedef struct {
    logic [N-1:1] hre, him;
    int           load_edge;
    int           tm;
  } exp_t;
  exp_t expq[$];
  int n_done = 0;

  always @(negedge clk) begin
    if (rst_n && done) begin
      exp_t e;
      n_done++;
      if (expq.size() == 0) failures++;
      else begin
        e = expq.pop_front();
        checks += 3;
        if (cyc - e.load_edge != e.tm * (N + 3)) begin
          failures++;
          $display("N=%0d: latency %0d, expected %0d", N, cyc - e.load_edge, e.tm * (N + 3));
        end
        if (e.tm == 1 && (min_latency == 0 || cyc - e.load_edge < min_latency))
          min_latency = cyc - e.load_edge;
        if (hard_re !== e.hre) failures++;
        if (hard_im !== e.him) failures++;
      end
    end
  end

  task automatic issue(input int tm, input int sh, input bit bp);
    int s0re[MAXN], s0im[MAXN], sre[MAXN], sim[MAXN], chre, chim;
    stats_t st;
    exp_t e;
    st = '{default: 0};
    chre = 8; chim = bp ? 0 : 8;
    for (int k = 0; k < N; k++) begin
      s0re[k] = int'($urandom_range(16)) - 8;
      s0im[k] = bp ? 0 : int'($urandom_range(16)) - 8;
    end
    run(N, tm, sh, bp, gre, gim, s0re, s0im, chre, chim, sre, sim, st);
    for (int k = 1; k < N; k++) begin
      e.hre[k] = (sre[k] < 0);
      e.him[k] = (sim[k] < 0);
    end
    e.tm = tm;
    start = 1'b1; t_max = IT_W'(tm); rho_shift = SH_W'(sh); bpsk = bp;
    s_check = '{re: s_t'(chre), im: s_t'(chim)};
    for (int k = 1; k < N; k++) s0[k] = '{re: s_t'(s0re[k]), im: s_t'(s0im[k])};
    while (!ready) @(negedge clk);
    e.load_edge = cyc + 1;
    expq.push_back(e);
    @(negedge clk);
    start = 1'b0;
  endtask

  initial begin
    checks = 0; failures = 0; finished = 1'b0; min_latency = 0;
    rst_n = 1'b0; mem_we = 1'b0; mem_pe = '0; mem_waddr = '0; mem_wdata = '0;
    start = 1'b0; t_max = '0; rho_shift = '0; bpsk = 1'b0; s_check = '0;
    for (int k = 1; k < N; k++) s0[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N; k++)
      for (int j = 0; j < N; j++) begin
        gre[k][j] = int'($urandom_range(1200)) - 600;
        gim[k][j] = int'($urandom_range(1200)) - 600;
      end
    for (int k = 1; k < N; k++)
      for (int a = 0; a < N; a++) begin
        @(negedge clk);
        mem_we = 1'b1; mem_pe = k[$clog2(N)-1:0]; mem_waddr = a[$clog2(N)-1:0];
        mem_wdata = '{re: g_t'(gre[k][(k + a) % N]), im: g_t'(gim[k][(k + a) % N])};
      end
    @(negedge clk);
    mem_we = 1'b0;
    issue(1, 2, 1'b0);                  // from idle
    while (busy) @(negedge clk);
    for (int i = 0; i < 8; i++) issue($urandom_range(1, 3), $urandom_range(1, 3), $urandom_range(1));
    issue(1, 1, 1'b0);
    while (busy || expq.size() != 0) @(negedge clk);
    checks++;
    if (n_done != 10) failures++;
    finished = 1'b1;
  end

endmodule
