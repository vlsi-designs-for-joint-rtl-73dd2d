// tb_prox_cmac: runs N-term complex dot products through the MAC unit with
// the schedule used by the array (G-hat word one cycle ahead of s, first
// partial sum in cycle 2, accumulate in cycles 3..N+1) and checks that the
// accumulator equals the bit-exact reference exactly in cycle N+2 and holds
// afterwards. Small and full-range operands cover the wrapping adders and the
// saturating accumulator.
module tb_prox_cmac;
  import prox_pkg::*;
  import prox_ref_pkg::*;

  localparam int N = 9;

  logic clk = 1'b0, rst_n;
  cg_t  g_in;
  cs_t  s_in;
  logic acc_first, acc_en;
  ca_t  acc;
  logic sat_evt;

  prox_cmac dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_sat = 0, n_sat_model = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (sat_evt) n_sat++;

  int gre[MAXN][MAXN], gim[MAXN][MAXN], sre[MAXN], sim[MAXN];

  task automatic one_dot(input int grange, input int srange);
    int qre, qim;
    stats_t st;
    st = '{default: 0};
    for (int j = 0; j < N; j++) begin
      gre[0][j] = int'($urandom_range(2 * grange)) - grange;
      gim[0][j] = int'($urandom_range(2 * grange)) - grange;
      sre[j]    = int'($urandom_range(2 * srange)) - srange;
      sim[j]    = int'($urandom_range(2 * srange)) - srange;
    end
    mvp_row(N, 0, gre, gim, sre, sim, qre, qim, st);
    n_sat_model += st.n_sat;
    // cycle -1: G-hat word 0
    @(negedge clk);
    g_in = '{re: g_t'(gre[0][0]), im: g_t'(gim[0][0])};
    acc_first = 1'b0; acc_en = 1'b0;
    for (int c = 0; c <= N + 4; c++) begin
      @(negedge clk);
      if (c < N)     s_in = '{re: s_t'(sre[c]), im: s_t'(sim[c])};
      else           s_in = cs_t'($urandom);
      if (c + 1 < N) g_in = '{re: g_t'(gre[0][c+1]), im: g_t'(gim[0][c+1])};
      else           g_in = cg_t'($urandom);
      acc_first = (c == 2);
      acc_en    = (c >= 3) && (c <= N + 1);
      if (c >= N + 2) begin
        checks++;
        if (int'(acc.re) != qre || int'(acc.im) != qim) begin
          failures++;
          $display("cycle %0d: acc=(%0d,%0d) expected (%0d,%0d)", c, acc.re, acc.im, qre, qim);
        end
      end else if (c == N + 1) begin
        // one cycle early the last term is not yet in
        checks++;
        if (int'(acc.re) == qre && int'(acc.im) == qim && (sre[N-1] != 0 || sim[N-1] != 0) &&
            (gre[0][N-1] != 0 || gim[0][N-1] != 0)) begin
          // coincidence is possible only if the last term is zero after truncation
          if (term(gre[0][N-1], sre[N-1]) != 0 || term(gim[0][N-1], sim[N-1]) != 0 ||
              term(gre[0][N-1], sim[N-1]) != 0 || term(gim[0][N-1], sre[N-1]) != 0) begin
            failures++;
            $display("result already complete in cycle N+1");
          end
        end
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; g_in = '0; s_in = '0; acc_first = 1'b0; acc_en = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 40; i++) one_dot(300, 8);
    for (int i = 0; i < 40; i++) one_dot(2047, 31);
    for (int i = 0; i < 20; i++) one_dot(2047, 8);
    checks++;
    if (n_sat_model == 0 || n_sat == 0) begin
      failures++;
      $display("saturation not exercised (model %0d, dut %0d)", n_sat_model, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
