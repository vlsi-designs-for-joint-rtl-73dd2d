// prox_pkg: fixed-point formats and control types shared by the PrOX
// joint channel-estimation / data-detection array.
//
// Number formats (two's complement):
//   s entries (iterates s^(t))   : 6 bit, 3 fraction bits   (+1.0 = 8)
//   G-hat entries                : 12 bit, 11 fraction bits
//   multiplier products          : 18 bit, 14 fraction bits
//   adders / accumulator / q~    : 15 bit, 11 fraction bits
//   1/rho                        : 12 bit, 11 fraction bits
//   rho shift amount             : 4 bit (rho = 2^shift, rho > 1)
// These widths follow the published fixed-point design. The iteration
// count width, the address width and the control struct are choices of this
// implementation.
package prox_pkg;

  localparam int unsigned S_W     = 6;   // s entry width
  localparam int unsigned S_FRAC  = 3;
  localparam int unsigned G_W     = 12;  // G-hat entry width
  localparam int unsigned G_FRAC  = 11;
  localparam int unsigned P_W     = G_W + S_W;  // 18-bit product
  localparam int unsigned A_W     = 15;  // adder / accumulator width
  localparam int unsigned A_FRAC  = 11;
  localparam int unsigned R_W     = 12;  // 1/rho width
  localparam int unsigned SH_W    = 4;   // rho shift-amount width
  localparam int unsigned IT_W    = 5;   // t_max width (1..31 iterations)

  typedef logic signed [S_W-1:0] s_t;
  typedef logic signed [G_W-1:0] g_t;
  typedef logic signed [P_W-1:0] p_t;
  typedef logic signed [A_W-1:0] a_t;

  typedef struct packed {
    s_t re;
    s_t im;
  } cs_t;                 // complex iterate entry

  typedef struct packed {
    g_t re;
    g_t im;
  } cg_t;                 // complex G-hat entry

  typedef struct packed {
    a_t re;
    a_t im;
  } ca_t;                 // complex accumulator value

  // +1 and -1 in the s format
  localparam s_t S_POS1 = s_t'(1 << S_FRAC);
  localparam s_t S_NEG1 = s_t'(-(1 << S_FRAC));

  // Source of the s register of every PE for the next clock edge.
  typedef enum logic [1:0] {
    SSEL_HOLD  = 2'd0,    // keep the value
    SSEL_INIT  = 2'd1,    // load s^(0) (start of a new problem)
    SSEL_SHIFT = 2'd2,    // take the value of the next PE in the ring
    SSEL_PROJ  = 2'd3     // take the projection-unit result s^(t)
  } ssel_e;

  // Control word broadcast from the controller to all PEs.
  typedef struct packed {
    ssel_e s_sel;
    logic  acc_first;     // accumulator loads the first partial sum
    logic  acc_en;        // accumulator adds the next partial sum
    logic  out_en;        // capture hard outputs (last iteration)
    logic  bpsk;          // BPSK: imaginary part of s forced to 0
    logic [SH_W-1:0] rho_shift;
  } ctrl_t;

  // Saturate a wider signed value to A_W bits.
  function automatic a_t sat_a(input logic signed [A_W:0] v);
    if (v > $signed({2'b00, {(A_W-1){1'b1}}}))      return {1'b0, {(A_W-1){1'b1}}};
    else if (v < $signed({2'b11, {(A_W-1){1'b0}}})) return {1'b1, {(A_W-1){1'b0}}};
    else                                            return v[A_W-1:0];
  endfunction

endpackage
