// sc_sigmoid -- stochastic sigmoid(x) circuit, x in [0,1).
//
// Series 1/2 + x/4 - x^3/48 + x^5/480 in Horner form:
//   g          = 1 - x^2/12 (1 - x^2/10)
//   sigmoid(x) ~ 1/2 + x g / 4 = 1 - 1/2 (1 - 1/2 x g)
// computed on unipolar bit-streams as
//   i1 = X AND X(delayed D1)          ~ x^2
//   h  = NAND(c1/10, i1)              = 1 - x^2/10
//   g  = NAND(c1/12, i1(D2), h)
//   t  = NAND(c1/2a, X(D3), g)        = 1 - x g / 2
//   y  = NAND(c1/2b, t)               = 1/2 + x g / 4
// The two 1/2 constants must be independent of each other (with one shared
// stream the result would be 1/2 + x g / 2). The paper lists three
// coefficient bases (VDC-2,4,32) for the four constants; here the second 1/2
// reuses VDC-4, a choice of this design that reproduces the accuracy the
// paper reports. The input uses VDC-1024, i.e. the counter itself, and only
// the squaring delay (2) remains.
// Interface and timing as sc_sin.
module sc_sigmoid
  import transc_pkg::*;
#(
  parameter int unsigned M     = 10,
  parameter int unsigned IN_NB = 10,  // input: VDC-1024
  parameter int unsigned C1_NB = 1,   // 1/10:  VDC-2
  parameter int unsigned C2_NB = 2,   // 1/12:  VDC-4
  parameter int unsigned C3_NB = 5,   // 1/2:   VDC-32
  parameter int unsigned C4_NB = 2,   // 1/2:   VDC-4 (not listed in the paper)
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

  localparam logic [M-1:0] K1 = M'(coef_q(1, 10, M));
  localparam logic [M-1:0] K2 = M'(coef_q(1, 12, M));
  localparam logic [M-1:0] K3 = M'(coef_q(1,  2, M));
  localparam logic [M-1:0] K4 = M'(coef_q(1,  2, M));

  logic xs, c1, c2, c3, c4;
  logic x_d1, i1_d2, x_d3;
  logic i1, h, g, t;

  sc_sng #(.M(M), .NB(IN_NB)) u_x  (.count(count), .value(x),  .bit_o(xs));
  sc_sng #(.M(M), .NB(C1_NB)) u_c1 (.count(count), .value(K1), .bit_o(c1));
  sc_sng #(.M(M), .NB(C2_NB)) u_c2 (.count(count), .value(K2), .bit_o(c2));
  sc_sng #(.M(M), .NB(C3_NB)) u_c3 (.count(count), .value(K3), .bit_o(c3));
  sc_sng #(.M(M), .NB(C4_NB)) u_c4 (.count(count), .value(K4), .bit_o(c4));

  sc_delay #(.DEPTH(D1)) u_d1 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d1));
  sc_delay #(.DEPTH(D2)) u_d2 (.clk, .rst_n, .clr, .en, .d(i1), .q(i1_d2));
  sc_delay #(.DEPTH(D3)) u_d3 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d3));

  always_comb begin
    i1 = xs & x_d1;
    h  = ~(c1 & i1);
    g  = ~(c2 & i1_d2 & h);
    t  = ~(c3 & x_d3 & g);
    y  = ~(c4 & t);
  end

endmodule
