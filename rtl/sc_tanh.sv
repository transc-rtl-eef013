// sc_tanh -- stochastic tanh(x) circuit, x in [0,1).
//
// Horner form of the 7th-order Maclaurin series:
//   tanh(x) = x (1 - x^2/3 (1 - 2x^2/5 (1 - 17x^2/42)))
// computed on unipolar bit-streams as
//   i1 = X AND X(delayed D1)          ~ x^2
//   i2 = NAND(c17/42, i1)             = 1 - 17x^2/42
//   i3 = NAND(c2/5, i1(D2), i2)       = 1 - 2x^2/5 * i2
//   i4 = NAND(c1/3, i1(D3), i3)       = 1 - x^2/3  * i3
//   y  = X(D4) AND i4
// The input X and the three coefficient streams all come from the one shared
// counter, each through its own VDC-2^n reordering (IN_NB, C*_NB). Because
// those views are mutually low-correlated, the mid-stage delays D2..D4 of the
// earlier LFSR-based design are not needed (0 by default); only the delay
// that squares X remains (3, as in the earlier design, for this function). Defaults are the paper's
// configuration for N = 1024. The coefficient bases are quoted by the paper;
// the rounding of the coefficients to M bits is this design's choice.
// Interface: count is the shared counter, x the M-bit input; y is
// combinational from count, x and the delay registers, one bit per enabled
// cycle. clr empties the delays; rst_n is asynchronous active-low.
module sc_tanh
  import transc_pkg::*;
#(
  parameter int unsigned M     = 10,
  parameter int unsigned IN_NB = 4,   // input:  VDC-16
  parameter int unsigned C1_NB = 5,   // 17/42:  VDC-32
  parameter int unsigned C2_NB = 4,   // 2/5:    VDC-16
  parameter int unsigned C3_NB = 1,   // 1/3:    VDC-2
  parameter int unsigned D1    = 3,
  parameter int unsigned D2    = 0,
  parameter int unsigned D3    = 0,
  parameter int unsigned D4    = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic [M-1:0] count,
  input  logic [M-1:0] x,
  output logic         y
);

  localparam logic [M-1:0] K1 = M'(coef_q(17, 42, M));
  localparam logic [M-1:0] K2 = M'(coef_q( 2,  5, M));
  localparam logic [M-1:0] K3 = M'(coef_q( 1,  3, M));

  logic xs, c1, c2, c3;
  logic x_d1, x_d4, i1_d2, i1_d3;
  logic i1, i2, i3, i4;

  sc_sng #(.M(M), .NB(IN_NB)) u_x  (.count(count), .value(x),  .bit_o(xs));
  sc_sng #(.M(M), .NB(C1_NB)) u_c1 (.count(count), .value(K1), .bit_o(c1));
  sc_sng #(.M(M), .NB(C2_NB)) u_c2 (.count(count), .value(K2), .bit_o(c2));
  sc_sng #(.M(M), .NB(C3_NB)) u_c3 (.count(count), .value(K3), .bit_o(c3));

  sc_delay #(.DEPTH(D1)) u_d1 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d1));
  sc_delay #(.DEPTH(D2)) u_d2 (.clk, .rst_n, .clr, .en, .d(i1), .q(i1_d2));
  sc_delay #(.DEPTH(D3)) u_d3 (.clk, .rst_n, .clr, .en, .d(i1), .q(i1_d3));
  sc_delay #(.DEPTH(D4)) u_d4 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d4));

  always_comb begin
    i1 = xs & x_d1;
    i2 = ~(c1 & i1);
    i3 = ~(c2 & i1_d2 & i2);
    i4 = ~(c3 & i1_d3 & i3);
    y  = x_d4 & i4;
  end

endmodule
