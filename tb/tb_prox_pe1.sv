// tb_prox_pe1: checks PE 1: INIT loads s-check into both its s register and
// its s-check flip-flops, SHIFT forwards the value of PE 2, PROJ restores
// s-check, HOLD keeps the value; a change of the s_check input outside INIT
// must not affect the stored symbol.
module tb_prox_pe1;
  import prox_pkg::*;

  logic  clk = 1'b0, rst_n;
  ctrl_t ctrl;
  cs_t   s_check, s_next, s_out;

  prox_pe1 dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input ssel_e sel, input cs_t nxt, input cs_t expv);
    @(negedge clk);
    ctrl = '0; ctrl.s_sel = sel; s_next = nxt;
    @(negedge clk);
    ctrl.s_sel = SSEL_HOLD;
    checks++;
    if (s_out !== expv) begin
      failures++;
      $display("sel %s: s_out %h expected %h", sel.name(), s_out, expv);
    end
  endtask

  initial begin
    cs_t chk, v, last;
    rst_n = 1'b0; ctrl = '0; s_check = '0; s_next = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 50; i++) begin
      chk = cs_t'($urandom);
      s_check = chk;
      step(SSEL_INIT, cs_t'($urandom), chk);
      s_check = cs_t'($urandom);            // must be ignored from now on
      last = chk;
      for (int c = 0; c < 4; c++) begin
        v = cs_t'($urandom);
        step(SSEL_SHIFT, v, v);
        last = v;
      end
      step(SSEL_HOLD, cs_t'($urandom), last);
      step(SSEL_PROJ, cs_t'($urandom), chk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
