// tb_prox_sizes: runs the array at the four published array sizes
// N = 5, 9, 17, 33 (K = 4, 8, 16, 32) side by side, each checked bit-exactly
// against the reference model, and checks that the latency of a one-iteration
// problem is K+4 cycles: 8, 12, 20 and 36, the published minimum latencies.
module tb_prox_sizes;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NS = 4;
  localparam int SIZES [NS] = '{5, 9, 17, 33};

  int c [NS], f [NS], lat [NS];
  bit fin [NS];

  for (genvar i = 0; i < NS; i++) begin : g_size
    prox_size_run #(.N(SIZES[i])) u_run (
      .clk         (clk),
      .checks      (c[i]),
      .failures    (f[i]),
      .min_latency (lat[i]),
      .finished    (fin[i])
    );
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20;
    while (!(fin[0] && fin[1] && fin[2] && fin[3])) @(posedge clk);
    for (int i = 0; i < NS; i++) begin
      checks += c[i] + 1;
      failures += f[i];
      $display("N=%0d: checks=%0d failures=%0d one-iteration latency=%0d cycles",
               SIZES[i], c[i], f[i], lat[i]);
      if (lat[i] != SIZES[i] + 3) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
