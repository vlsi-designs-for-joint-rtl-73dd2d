// prox_ghat_mem: G-hat-matrix memory of one processing element.
//
// Holds the k-th row of G-hat, real and imaginary parts side by side, in
// cyclically permuted order: word a contains G-hat(k, ((k-1+a) mod N)+1), so
// the PE reads words 0,1,...,N-1 in plain order while the s values circulate
// through the array. The permutation is applied by whoever fills the memory
// (the preprocessing step); this block only stores words.
//
// Interface: one synchronous write port (we/waddr/wdata, written on the rising
// clock edge) and one asynchronous read port (raddr -> rdata). The read data
// is registered by the MAC unit that follows, as in the published PE diagram.
// The published ASIC builds this memory from latch arrays; here it is an array
// of flip-flops with the same behaviour at the port, which is this design's
// choice. The contents are not reset: they must be written before use.
module prox_ghat_mem
  import prox_pkg::*;
#(
  parameter int unsigned DEPTH = 17,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  cg_t           wdata,
  input  logic [AW-1:0] raddr,
  output cg_t           rdata
);

  cg_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  always_comb begin
    if (32'(raddr) < DEPTH) rdata = mem[raddr];
    else                    rdata = '0;
  end

endmodule
