// tb_prox_proj: checks the projection module against the reference
// clip(rho*q, -1, +1) for every rho shift 0..15 and for q values at and
// around the clipping thresholds, at the saturation limits and at random.
module tb_prox_proj;
  import prox_pkg::*;
  import prox_ref_pkg::*;

  a_t              q;
  logic [SH_W-1:0] rho_shift;
  s_t              s;
  logic            clip_pos, clip_neg;

  prox_proj dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input int qv, input int sh);
    int exp_s, kind;
    q = a_t'(qv);
    rho_shift = SH_W'(sh);
    #1;
    exp_s = proj(qv, sh, kind);
    checks++;
    if (int'(s) != exp_s || clip_pos != (kind == 1) || clip_neg != (kind == -1)) begin
      failures++;
      if (failures < 10)
        $display("q=%0d sh=%0d: s=%0d (+%b -%b), expected %0d kind %0d",
                 qv, sh, s, clip_pos, clip_neg, exp_s, kind);
    end
  endtask

  initial begin
    int inv;
    for (int sh = 0; sh < 16; sh++) begin
      inv = 2048 >> ((sh == 0) ? 1 : sh);
      for (int d = -3; d <= 3; d++) begin
        check_one(inv + d, sh);
        check_one(-inv + d, sh);
        check_one(d, sh);
      end
      check_one(16383, sh);
      check_one(-16384, sh);
      check_one(16383 - inv, sh);
      check_one(-16384 + inv, sh);
      for (int i = 0; i < 200; i++) check_one(int'($urandom_range(32767)) - 16384, sh);
      for (int i = 0; i < 200; i++) check_one(int'($urandom_range(2 * inv + 8)) - inv - 4, sh);
    end
    // explicit values: rho = 4 (shift 2), 1/rho = 512
    check_one(511, 2);   // 0.2495*4 = 0.998 -> 7/8 after truncation
    checks++;
    if (s != s_t'(7)) failures++;
    check_one(512, 2);   // exactly 1/rho -> +1
    checks++;
    if (s != S_POS1) failures++;
    check_one(-512, 2);  // exactly -1/rho -> linear branch, -1.0
    checks++;
    if (s != S_NEG1 || clip_neg) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
