// tb_prox_ghat_mem: writes random words into the G-hat memory, reads every
// address back through the asynchronous read port, overwrites part of it and
// checks that only the written words change.
module tb_prox_ghat_mem;
  import prox_pkg::*;

  localparam int DEPTH = 17;
  localparam int AW = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we;
  logic [AW-1:0] waddr, raddr;
  cg_t           wdata, rdata;

  prox_ghat_mem #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  cg_t model [DEPTH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int a, input cg_t d);
    @(negedge clk);
    we = 1'b1; waddr = AW'(a); wdata = d;
    @(negedge clk);
    we = 1'b0;
    model[a] = d;
  endtask

  task automatic read_all();
    for (int a = 0; a < DEPTH; a++) begin
      raddr = AW'(a);
      #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("addr %0d: %h expected %h", a, rdata, model[a]);
      end
    end
  endtask

  initial begin
    we = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) write(a, cg_t'($urandom));
    read_all();
    for (int i = 0; i < 30; i++) write($urandom_range(DEPTH - 1), cg_t'($urandom));
    read_all();
    // a write with we low must not change anything
    @(negedge clk);
    waddr = '0; wdata = ~model[0];
    @(negedge clk);
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
