// sc_ln1p -- stochastic ln(1+x) circuit, x in [0,1).
//
// Horner form of the 5th-order Maclaurin series:
//   ln(1+x) = x (1 - x/2 (1 - 2x/3 (1 - 3x/4 (1 - 4x/5))))
// computed on unipolar bit-streams as a chain of NAND gates, each fed by one
// coefficient stream, by the input stream X and by the previous stage:
//   s1 = NAND(k1, X)
//   s2 = NAND(k2, X(D1), s1)
//   s3 = NAND(k3, X(D2), s2)
//   s4 = NAND(k4, X(D3), s3)
//   y  = X(D4) AND s4
// Every power here is of x itself (no squaring stage). The earlier design put
// one delay on each X branch; the paper's configuration removes all of them
// (D1..D4 = 0), so the same X stream reaches every gate. Then, wherever X = 1
// the inner stages see only the constants, and the circuit computes
// about 0.633x rather than ln(1+x): the delays are kept
// as parameters so that a decorrelated variant can be built.
// Coefficient bases are the paper's for N = 1024, in drawing order;
// coefficient rounding to M bits is this design's choice.
// Interface and timing as sc_sin.
module sc_ln1p
  import transc_pkg::*;
#(
  parameter int unsigned M     = 10,
  parameter int unsigned IN_NB = 6,   // input: VDC-64
  parameter int unsigned C1_NB = 2,   // 4/5:   VDC-4
  parameter int unsigned C2_NB = 9,   // 3/4:   VDC-512
  parameter int unsigned C3_NB = 10,  // 2/3:   VDC-1024
  parameter int unsigned C4_NB = 9,   // 1/2:   VDC-512
  parameter int unsigned D1    = 0,
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

  localparam logic [M-1:0] K1 = M'(coef_q(4, 5, M));
  localparam logic [M-1:0] K2 = M'(coef_q(3, 4, M));
  localparam logic [M-1:0] K3 = M'(coef_q(2, 3, M));
  localparam logic [M-1:0] K4 = M'(coef_q(1, 2, M));

  logic xs, c1, c2, c3, c4;
  logic x_d1, x_d2, x_d3, x_d4;
  logic s1, s2, s3, s4;

  sc_sng #(.M(M), .NB(IN_NB)) u_x  (.count(count), .value(x),  .bit_o(xs));
  sc_sng #(.M(M), .NB(C1_NB)) u_c1 (.count(count), .value(K1), .bit_o(c1));
  sc_sng #(.M(M), .NB(C2_NB)) u_c2 (.count(count), .value(K2), .bit_o(c2));
  sc_sng #(.M(M), .NB(C3_NB)) u_c3 (.count(count), .value(K3), .bit_o(c3));
  sc_sng #(.M(M), .NB(C4_NB)) u_c4 (.count(count), .value(K4), .bit_o(c4));

  sc_delay #(.DEPTH(D1)) u_d1 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d1));
  sc_delay #(.DEPTH(D2)) u_d2 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d2));
  sc_delay #(.DEPTH(D3)) u_d3 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d3));
  sc_delay #(.DEPTH(D4)) u_d4 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d4));

  always_comb begin
    s1 = ~(c1 & xs);
    s2 = ~(c2 & x_d1 & s1);
    s3 = ~(c3 & x_d2 & s2);
    s4 = ~(c4 & x_d3 & s3);
    y  = x_d4 & s4;
  end

endmodule
