// sc_sinc -- stochastic Sinc(x) = sin(x)/x circuit, x in [0,1).
//
// Horner form of the 6th-order series:
//   Sinc(x) = 1 - x^2/6 (1 - x^2/20 (1 - x^2/42))
// computed on unipolar bit-streams as
//   i1 = X AND X(delayed D1)          ~ x^2
//   i2 = NAND(c42, i1)
//   i3 = NAND(c20, i1(D2), i2)
//   y  = NAND(c6,  i1(D3), i3)
// It is the sin circuit without its final multiplication by x. Input and the
// three coefficients are VDC-2^n views of the shared counter; only the
// squaring delay (2, reduced from 3) remains. Defaults are the paper's
// configuration for N = 1024, coefficient bases in drawing order.
// Interface and timing as sc_sin.
module sc_sinc
  import transc_pkg::*;
#(
  parameter int unsigned M     = 10,
  parameter int unsigned IN_NB = 3,   // input: VDC-8
  parameter int unsigned C1_NB = 8,   // 1/42:  VDC-256
  parameter int unsigned C2_NB = 5,   // 1/20:  VDC-32
  parameter int unsigned C3_NB = 10,  // 1/6:   VDC-1024
  parameter int unsigned D1    = 2,
  parameter int unsigned D2    = 0,
  parameter int unsigned D3    = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic [M-1:0] count,
  input  logic [M-1:0] x,
  output logic         y
);

  localparam logic [M-1:0] K1 = M'(coef_q(1, 42, M));
  localparam logic [M-1:0] K2 = M'(coef_q(1, 20, M));
  localparam logic [M-1:0] K3 = M'(coef_q(1,  6, M));

  logic xs, c1, c2, c3;
  logic x_d1, i1_d2, i1_d3;
  logic i1, i2, i3;

  sc_sng #(.M(M), .NB(IN_NB)) u_x  (.count(count), .value(x),  .bit_o(xs));
  sc_sng #(.M(M), .NB(C1_NB)) u_c1 (.count(count), .value(K1), .bit_o(c1));
  sc_sng #(.M(M), .NB(C2_NB)) u_c2 (.count(count), .value(K2), .bit_o(c2));
  sc_sng #(.M(M), .NB(C3_NB)) u_c3 (.count(count), .value(K3), .bit_o(c3));

  sc_delay #(.DEPTH(D1)) u_d1 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d1));
  sc_delay #(.DEPTH(D2)) u_d2 (.clk, .rst_n, .clr, .en, .d(i1), .q(i1_d2));
  sc_delay #(.DEPTH(D3)) u_d3 (.clk, .rst_n, .clr, .en, .d(i1), .q(i1_d3));

  always_comb begin
    i1 = xs & x_d1;
    i2 = ~(c1 & i1);
    i3 = ~(c2 & i1_d2 & i2);
    y  = ~(c3 & i1_d3 & i3);
  end

endmodule
