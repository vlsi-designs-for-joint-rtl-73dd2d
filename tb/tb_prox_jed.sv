// tb_prox_jed: joint channel estimation and data detection on simulated
// SIMO transmissions, using the array at its default size (N = 17).
//
// For each trial a Rayleigh channel h (B antennas) and K+1 symbols s are
// drawn (BPSK or QPSK, the first symbol known), Y = h s^H + noise is formed,
// and the testbench does the preprocessing in floating point:
//   G = Y^H Y,  alpha = trace(G) (>= ||G||),
//   G-hat = (I + G/alpha)/gamma   (APrOX, Neumann-series form), or
//   G-hat = (I - G/alpha)^-1/gamma with alpha = 2 trace(G) (exact PrOX,
//           inverse by Gauss-Jordan elimination),
//   gamma chosen so that all entries of G-hat lie inside (-1, 1),
//   s^(0) = s_check * G(:,1) / G(1,1),
// quantises G-hat to 12 bits and s^(0) to 6 bits, runs the array with
// t_max = 3, and checks (1) the hard outputs against the bit-exact integer
// model and (2) the symbol error rate against the transmitted symbols.
// Scenarios: B = 16, K = 16 (QPSK and BPSK) and B = 128, K = 8 (QPSK), the
// latter run on the 17-PE array by padding G-hat and s^(0) with zeros.
module tb_prox_jed;
  import prox_pkg::*;
  import prox_ref_pkg::*;

  localparam int N = 17;
  localparam real PI = 3.14159265358979;

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

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real urand();
    return (real'($urandom) + 1.0) / 4294967297.0;
  endfunction

  function automatic real gauss();   // zero mean, unit variance
    return $sqrt(-2.0 * $ln(urand())) * $cos(2.0 * PI * urand());
  endfunction

  function automatic int quant(input real v, input int frac, input int w);
    int q;
    q = int'($floor(v * real'(1 << frac) + 0.5));
    return satn(q, w);
  endfunction

  // (I - G/alpha)^-1 by complex Gauss-Jordan elimination (no pivoting is
  // needed: I - G/alpha is Hermitian positive definite for alpha > ||G||).
  task automatic invert(input int n, input real alpha,
                        input real grr[MAXN][MAXN], input real gii[MAXN][MAXN],
                        output real xr[MAXN][MAXN], output real xi[MAXN][MAXN]);
    real ar[MAXN][MAXN], ai[MAXN][MAXN], pr, pi, d, fr, fi, tr, ti;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        ar[i][j] = ((i == j) ? 1.0 : 0.0) - grr[i][j] / alpha;
        ai[i][j] = -gii[i][j] / alpha;
        xr[i][j] = (i == j) ? 1.0 : 0.0;
        xi[i][j] = 0.0;
      end
    for (int p = 0; p < n; p++) begin
      // scale row p by 1/a_pp
      d  = ar[p][p] * ar[p][p] + ai[p][p] * ai[p][p];
      pr = ar[p][p] / d;
      pi = -ai[p][p] / d;
      for (int j = 0; j < n; j++) begin
        tr = ar[p][j] * pr - ai[p][j] * pi; ti = ar[p][j] * pi + ai[p][j] * pr;
        ar[p][j] = tr; ai[p][j] = ti;
        tr = xr[p][j] * pr - xi[p][j] * pi; ti = xr[p][j] * pi + xi[p][j] * pr;
        xr[p][j] = tr; xi[p][j] = ti;
      end
      for (int i = 0; i < n; i++) begin
        if (i == p) continue;
        fr = ar[i][p]; fi = ai[i][p];
        for (int j = 0; j < n; j++) begin
          ar[i][j] -= fr * ar[p][j] - fi * ai[p][j];
          ai[i][j] -= fr * ai[p][j] + fi * ar[p][j];
          xr[i][j] -= fr * xr[p][j] - fi * xi[p][j];
          xi[i][j] -= fr * xi[p][j] + fi * xr[p][j];
        end
      end
    end
  endtask

  int gre[MAXN][MAXN], gim[MAXN][MAXN];
  int sym_err = 0, sym_total = 0, init_err = 0;

  // One trial with B antennas and K+1 = nk used slots (nk <= N).
  task automatic trial(input int nb, input int nk, input bit bp, input real snr_db,
                       input bit exact = 1'b0);
    real hr[128], hi[128], yr[128][MAXN], yi[128][MAXN];
    real grr[MAXN][MAXN], gii[MAXN][MAXN], alpha, gamma, n0, mx;
    real mr[MAXN][MAXN], mi[MAXN][MAXN];
    int  sr[MAXN], si[MAXN];        // transmitted symbols, +-1
    int  s0re[MAXN], s0im[MAXN], outre[MAXN], outim[MAXN];
    stats_t st;
    st = '{default: 0};
    n0 = 1.0 / (10.0 ** (snr_db / 10.0));
    for (int b = 0; b < nb; b++) begin
      hr[b] = gauss() * $sqrt(0.5);
      hi[b] = gauss() * $sqrt(0.5);
    end
    for (int k = 0; k < nk; k++) begin
      sr[k] = $urandom_range(1) ? 1 : -1;
      si[k] = bp ? 0 : ($urandom_range(1) ? 1 : -1);
    end
    // Y(:,k) = h * conj(s_k) / |s| + noise (unit symbol energy)
    for (int b = 0; b < nb; b++)
      for (int k = 0; k < nk; k++) begin
        real nr, ni, sc;
        sc = bp ? 1.0 : $sqrt(0.5);
        nr = gauss() * $sqrt(n0 / 2.0);
        ni = gauss() * $sqrt(n0 / 2.0);
        yr[b][k] = sc * (hr[b] * sr[k] + hi[b] * si[k]) + nr;
        yi[b][k] = sc * (hi[b] * sr[k] - hr[b] * si[k]) + ni;
      end
    // G = Y^H Y
    alpha = 0.0;
    for (int i = 0; i < nk; i++)
      for (int j = 0; j < nk; j++) begin
        grr[i][j] = 0.0; gii[i][j] = 0.0;
        for (int b = 0; b < nb; b++) begin
          grr[i][j] += yr[b][i] * yr[b][j] + yi[b][i] * yi[b][j];
          gii[i][j] += yr[b][i] * yi[b][j] - yi[b][i] * yr[b][j];
        end
      end
    for (int i = 0; i < nk; i++) alpha += grr[i][i];
    // M = I + G/alpha (APrOX) or (I - G/alpha)^-1 (PrOX)
    if (exact) begin
      alpha = 2.0 * alpha;
      invert(nk, alpha, grr, gii, mr, mi);
    end else begin
      for (int i = 0; i < nk; i++)
        for (int j = 0; j < nk; j++) begin
          mr[i][j] = ((i == j) ? 1.0 : 0.0) + grr[i][j] / alpha;
          mi[i][j] = gii[i][j] / alpha;
        end
    end
    // G-hat = M/gamma
    mx = 0.0;
    for (int i = 0; i < nk; i++)
      for (int j = 0; j < nk; j++) begin
        real a, b2;
        a  = mr[i][j];
        b2 = mi[i][j];
        if (a > mx) mx = a;
        if (-a > mx) mx = -a;
        if (b2 > mx) mx = b2;
        if (-b2 > mx) mx = -b2;
      end
    gamma = mx * 1.01;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        if (i < nk && j < nk) begin
          gre[i][j] = quant(mr[i][j] / gamma, 11, 12);
          gim[i][j] = quant(mi[i][j] / gamma, 11, 12);
        end else begin
          gre[i][j] = 0; gim[i][j] = 0;
        end
      end
    // s^(0) = s_check * G(:,1) / G(1,1); G(1,1) is real
    for (int k = 0; k < N; k++) begin
      if (k < nk) begin
        real cr, ci;
        cr = bp ? real'(sr[0]) : real'(sr[0]);
        ci = bp ? 0.0 : real'(si[0]);
        s0re[k] = quant((cr * grr[k][0] - ci * gii[k][0]) / grr[0][0], 3, 6);
        s0im[k] = bp ? 0 : quant((cr * gii[k][0] + ci * grr[k][0]) / grr[0][0], 3, 6);
        if (k > 0 && ((s0re[k] < 0) != (sr[k] < 0) || (!bp && ((s0im[k] < 0) != (si[k] < 0)))))
          init_err++;
      end else begin
        s0re[k] = 0; s0im[k] = 0;
      end
    end
    // load the array
    for (int k = 1; k < N; k++)
      for (int a = 0; a < N; a++) begin
        @(negedge clk);
        mem_we = 1'b1;
        mem_pe = k[$clog2(N)-1:0];
        mem_waddr = a[$clog2(N)-1:0];
        mem_wdata = '{re: g_t'(gre[k][(k + a) % N]), im: g_t'(gim[k][(k + a) % N])};
      end
    @(negedge clk);
    mem_we = 1'b0;
    // reference
    run(N, 3, 1, bp, gre, gim, s0re, s0im, 8 * sr[0], 8 * si[0], outre, outim, st);
    // run
    start = 1'b1; t_max = 3; rho_shift = 1; bpsk = bp;
    s_check = '{re: s_t'(8 * sr[0]), im: s_t'(8 * si[0])};
    for (int k = 1; k < N; k++) s0[k] = '{re: s_t'(s0re[k]), im: s_t'(s0im[k])};
    while (!ready) @(negedge clk);
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    for (int k = 1; k < N; k++) begin
      checks++;
      if (hard_re[k] != (outre[k] < 0) || hard_im[k] != (outim[k] < 0)) begin
        failures++;
        $display("PE %0d: hard (%b,%b), model (%0d,%0d)", k, hard_re[k], hard_im[k], outre[k], outim[k]);
      end
      if (k < nk) begin
        sym_total++;
        if (hard_re[k] != (sr[k] < 0) || (!bp && hard_im[k] != (si[k] < 0))) sym_err++;
      end else begin
        // padded slots stay at zero and never decide negative
        checks++;
        if (hard_re[k] || hard_im[k]) begin
          failures++;
          $display("padded PE %0d produced a negative decision", k);
        end
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; mem_we = 1'b0; mem_pe = '0; mem_waddr = '0; mem_wdata = '0;
    start = 1'b0; t_max = '0; rho_shift = '0; bpsk = 1'b0; s_check = '0;
    for (int k = 1; k < N; k++) s0[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int i = 0; i < 100; i++) trial(16, 17, 1'b0, 2.0);
    $display("B=16 K=16 QPSK  2 dB: %0d symbol errors of %0d (initial guess %0d)", sym_err, sym_total, init_err);
    checks++;
    if (sym_err * 50 > sym_total || sym_err > init_err) failures++;  // SER above 2 % or no gain
    sym_err = 0; sym_total = 0; init_err = 0;

    for (int i = 0; i < 100; i++) trial(16, 17, 1'b1, -1.0);
    $display("B=16 K=16 BPSK -1 dB: %0d symbol errors of %0d (initial guess %0d)", sym_err, sym_total, init_err);
    checks++;
    if (sym_err * 50 > sym_total || sym_err > init_err) failures++;  // SER above 2 % or no gain
    sym_err = 0; sym_total = 0; init_err = 0;

    for (int i = 0; i < 100; i++) trial(16, 17, 1'b0, 2.0, 1'b1);
    $display("B=16 K=16 QPSK  2 dB, exact PrOX: %0d symbol errors of %0d (initial guess %0d)", sym_err, sym_total, init_err);
    checks++;
    if (sym_err * 50 > sym_total || sym_err > init_err) failures++;  // SER above 2 % or no gain
    sym_err = 0; sym_total = 0; init_err = 0;

    for (int i = 0; i < 100; i++) trial(128, 9, 1'b0, -6.0);
    $display("B=128 K=8 QPSK -6 dB: %0d symbol errors of %0d (initial guess %0d)", sym_err, sym_total, init_err);
    checks++;
    if (sym_err * 50 > sym_total || sym_err > init_err) failures++;  // SER above 2 % or no gain

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
