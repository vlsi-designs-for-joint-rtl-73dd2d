// tb_prox_pe: tests one processing element (PE index KPE of an N = 5 ring).
// The testbench plays the rest of the ring (the other N-1 s registers) and the
// controller's schedule, and fills the PE's memory with the cyclically
// permuted row of a random G-hat. After every iteration the PE's s register
// must equal the reference s^(t) entry, and after the last one the hard
// outputs must equal its signs. QPSK and BPSK problems are run.
module tb_prox_pe;
  import prox_pkg::*;
  import prox_ref_pkg::*;

  localparam int N   = 5;
  localparam int KPE = 2;
  localparam int AW  = $clog2(N);

  logic          clk = 1'b0, rst_n;
  ctrl_t         ctrl;
  logic [AW-1:0] rd_addr;
  logic          mem_we;
  logic [AW-1:0] mem_waddr;
  cg_t           mem_wdata;
  cs_t           s0, s_next, s_out;
  logic          hard_re, hard_im, sat_evt;

  prox_pe #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rest of the ring
  cs_t ring [N];
  cs_t init_v [N];
  cs_t proj_v [N];
  assign s_next = ring[(KPE + 1) % N];
  assign s0     = init_v[KPE];
  always @(posedge clk) begin
    for (int j = 0; j < N; j++) begin
      if (j == KPE) continue;
      case (ctrl.s_sel)
        SSEL_INIT:  ring[j] <= init_v[j];
        SSEL_SHIFT: ring[j] <= ((j + 1) % N == KPE) ? s_out : ring[(j + 1) % N];
        SSEL_PROJ:  ring[j] <= proj_v[j];
        default: ;
      endcase
    end
  end

  int gre[MAXN][MAXN], gim[MAXN][MAXN];

  task automatic problem(input int grange, input int tm, input int sh, input bit bp);
    int s0re[MAXN], s0im[MAXN], sre[MAXN], sim[MAXN], chre, chim;
    stats_t st;
    st = '{default: 0};
    for (int k = 0; k < N; k++)
      for (int j = 0; j < N; j++) begin
        gre[k][j] = int'($urandom_range(2 * grange)) - grange;
        gim[k][j] = int'($urandom_range(2 * grange)) - grange;
      end
    for (int a = 0; a < N; a++) begin
      @(negedge clk);
      mem_we = 1'b1; mem_waddr = AW'(a);
      mem_wdata = '{re: g_t'(gre[KPE][(KPE + a) % N]), im: g_t'(gim[KPE][(KPE + a) % N])};
    end
    @(negedge clk);
    mem_we = 1'b0;
    chre = 8; chim = bp ? 0 : -8;
    for (int k = 0; k < N; k++) begin
      s0re[k] = int'($urandom_range(16)) - 8;
      s0im[k] = bp ? 0 : int'($urandom_range(16)) - 8;
    end
    s0re[0] = chre; s0im[0] = chim;
    for (int k = 0; k < N; k++) init_v[k] = '{re: s_t'(s0re[k]), im: s_t'(s0im[k])};
    // load
    @(negedge clk);
    ctrl = '0; ctrl.rho_shift = SH_W'(sh); ctrl.bpsk = bp; ctrl.s_sel = SSEL_INIT;
    rd_addr = '0;
    for (int t = 1; t <= tm; t++) begin
      run(N, t, sh, bp, gre, gim, s0re, s0im, chre, chim, sre, sim, st);
      for (int k = 0; k < N; k++) proj_v[k] = '{re: s_t'(sre[k]), im: s_t'(sim[k])};
      for (int c = 0; c <= N + 2; c++) begin
        @(negedge clk);
        ctrl.s_sel     = (c < N) ? SSEL_SHIFT : (c == N + 2) ? SSEL_PROJ : SSEL_HOLD;
        rd_addr        = (c + 1 < N) ? AW'(c + 1) : '0;
        ctrl.acc_first = (c == 2);
        ctrl.acc_en    = (c >= 3) && (c <= N + 1);
        ctrl.out_en    = (c == N + 2) && (t == tm);
      end
      @(negedge clk);
      ctrl = '0; ctrl.rho_shift = SH_W'(sh); ctrl.bpsk = bp;
      checks++;
      if (s_out.re != s_t'(sre[KPE]) || s_out.im != s_t'(sim[KPE])) begin
        failures++;
        $display("t=%0d: s=(%0d,%0d) expected (%0d,%0d)", t, s_out.re, s_out.im, sre[KPE], sim[KPE]);
      end
      if (t != tm) ctrl.s_sel = SSEL_HOLD;
    end
    checks++;
    if (hard_re != (sre[KPE] < 0) || hard_im != (sim[KPE] < 0)) begin
      failures++;
      $display("hard (%b,%b) expected for (%0d,%0d)", hard_re, hard_im, sre[KPE], sim[KPE]);
    end
  endtask

  initial begin
    rst_n = 1'b0; ctrl = '0; rd_addr = '0; mem_we = 1'b0; mem_waddr = '0; mem_wdata = '0;
    for (int k = 0; k < N; k++) begin init_v[k] = '0; proj_v[k] = '0; ring[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 30; i++) problem(700, $urandom_range(1, 4), $urandom_range(1, 4), 1'b0);
    for (int i = 0; i < 10; i++) problem(700, $urandom_range(1, 4), $urandom_range(1, 4), 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
