// tb_prox_ctrl: checks the controller's schedule cycle by cycle for an
// N = 5 array: per iteration N+3 cycles with SHIFT in cycles 0..N-1, memory
// address cyc+1, acc_first in cycle 2, acc_en in cycles 3..N+1 and PROJ in
// cycle N+2; out_en and ready only in the last projection cycle; done one
// cycle later; back-to-back starts (INIT replacing PROJ), starts from idle,
// t_max = 0 treated as 1, and the sampling of rho_shift and bpsk at start.
module tb_prox_ctrl;
  import prox_pkg::*;

  localparam int N  = 5;
  localparam int AW = $clog2(N);

  logic            clk = 1'b0, rst_n;
  logic            start;
  logic [IT_W-1:0] t_max;
  logic [SH_W-1:0] rho_shift;
  logic            bpsk;
  ctrl_t           ctrl;
  logic [AW-1:0]   rd_addr;
  logic            ready, busy, done;

  prox_ctrl #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input int got, input int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("%t %s = %0d, expected %0d", $time, what, got, exp_v);
    end
  endtask

  // Runs one problem whose load edge follows the current negedge (start is
  // already high and ready is high). If chain, the next problem is started in
  // its last cycle with the given parameters.
  task automatic run_problem(input int tm, input int sh, input bit bp,
                             input bit chain, input int tm2, input int sh2, input bit bp2,
                             input bit prev_chained);
    int teff, c, it;
    teff = (tm == 0) ? 1 : tm;
    @(negedge clk);               // first cycle after the load edge
    start = 1'b0;
    rho_shift = SH_W'($urandom); bpsk = $urandom_range(1);   // must not matter now
    for (int m = 0; m < teff * (N + 3); m++) begin
      c  = m % (N + 3);
      it = m / (N + 3);
      expect_eq("busy", busy, 1);
      expect_eq("done", done, (m == 0) ? int'(prev_chained) : 0);
      expect_eq("acc_first", ctrl.acc_first, c == 2);
      expect_eq("acc_en", ctrl.acc_en, (c >= 3) && (c <= N + 1));
      expect_eq("rd_addr", rd_addr, (c + 1 < N) ? c + 1 : 0);
      expect_eq("out_en", ctrl.out_en, (c == N + 2) && (it == teff - 1));
      expect_eq("ready", ready, (c == N + 2) && (it == teff - 1));
      expect_eq("rho_shift", ctrl.rho_shift, sh);
      expect_eq("bpsk", ctrl.bpsk, bp);
      if (c < N)              expect_eq("s_sel", ctrl.s_sel, SSEL_SHIFT);
      else if (c < N + 2)     expect_eq("s_sel", ctrl.s_sel, SSEL_HOLD);
      else if (it < teff - 1) expect_eq("s_sel", ctrl.s_sel, SSEL_PROJ);
      else if (!chain)        expect_eq("s_sel", ctrl.s_sel, SSEL_PROJ);
      if (m == teff * (N + 3) - 1 && chain) begin
        start = 1'b1; t_max = IT_W'(tm2); rho_shift = SH_W'(sh2); bpsk = bp2;
        #1;
        expect_eq("s_sel(init)", ctrl.s_sel, SSEL_INIT);
      end
      if (m != teff * (N + 3) - 1) @(negedge clk);
    end
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; t_max = '0; rho_shift = '0; bpsk = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_eq("ready idle", ready, 1);
    expect_eq("busy idle", busy, 0);
    expect_eq("s_sel idle", ctrl.s_sel, SSEL_HOLD);
    // start from idle, chain a second problem back to back
    start = 1'b1; t_max = 2; rho_shift = 3; bpsk = 1'b0;
    #1 expect_eq("s_sel(init)", ctrl.s_sel, SSEL_INIT);
    run_problem(2, 3, 0, 1, 1, 5, 1, 0);
    run_problem(1, 5, 1, 1, 0, 2, 0, 1);
    run_problem(0, 2, 0, 0, 0, 0, 0, 1);
    @(negedge clk);
    expect_eq("done", done, 1);
    expect_eq("busy after", busy, 0);
    expect_eq("ready after", ready, 1);
    @(negedge clk);
    expect_eq("done pulse", done, 0);
    repeat (3) begin
      @(negedge clk);
      expect_eq("idle s_sel", ctrl.s_sel, SSEL_HOLD);
      expect_eq("idle acc_en", ctrl.acc_en, 0);
    end
    // start from idle again, longer t_max
    start = 1'b1; t_max = 4; rho_shift = 1; bpsk = 1'b1;
    run_problem(4, 1, 1, 0, 0, 0, 0, 0);
    @(negedge clk);
    expect_eq("done", done, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
