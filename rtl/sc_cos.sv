// sc_cos -- stochastic cos(x) circuit, x in [0,1).
//
// Horner form of the 8th-order Maclaurin series:
//   cos(x) = 1 - x^2/2 (1 - x^2/12 (1 - x^2/30 (1 - x^2/56)))
// computed on unipolar bit-streams as
//   i1 = X AND X(delayed D1)          ~ x^2
//   i2 = NAND(c56, i1)                = 1 - x^2/56
//   i3 = NAND(c30, i1(D2), i2)
//   i4 = NAND(c12, i1(D3), i3)
//   y  = NAND(c2,  i1(D4), i4)
// Input and the four coefficient streams are different VDC-2^n views of the
// one shared counter. The paper's configuration for N = 1024 keeps only the
// squaring delay (2, reduced from 4) and drops the three mid-stage delays.
// The paper lists the coefficient bases as "VDC-8,4,16,256" without saying
// which belongs to which coefficient; they are assigned here in the order the
// coefficients are drawn (1/56 first). Coefficient rounding to M bits is this
// design's choice.
// Interface and timing as sc_sin: y is combinational from count, x and the
// delay registers; clr empties the delays; rst_n is asynchronous active-low.
module sc_cos
  import transc_pkg::*;
#(
  parameter int unsigned M     = 10,
  parameter int unsigned IN_NB = 3,   // input: VDC-8
  parameter int unsigned C1_NB = 3,   // 1/56:  VDC-8
  parameter int unsigned C2_NB = 2,   // 1/30:  VDC-4
  parameter int unsigned C3_NB = 4,   // 1/12:  VDC-16
  parameter int unsigned C4_NB = 8,   // 1/2:   VDC-256
  parameter int unsigned D1    = 2,
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

  localparam logic [M-1:0] K1 = M'(coef_q(1, 56, M));
  localparam logic [M-1:0] K2 = M'(coef_q(1, 30, M));
  localparam logic [M-1:0] K3 = M'(coef_q(1, 12, M));
  localparam logic [M-1:0] K4 = M'(coef_q(1,  2, M));

  logic xs, c1, c2, c3, c4;
  logic x_d1, i1_d2, i1_d3, i1_d4;
  logic i1, i2, i3, i4;

  sc_sng #(.M(M), .NB(IN_NB)) u_x  (.count(count), .value(x),  .bit_o(xs));
  sc_sng #(.M(M), .NB(C1_NB)) u_c1 (.count(count), .value(K1), .bit_o(c1));
  sc_sng #(.M(M), .NB(C2_NB)) u_c2 (.count(count), .value(K2), .bit_o(c2));
  sc_sng #(.M(M), .NB(C3_NB)) u_c3 (.count(count), .value(K3), .bit_o(c3));
  sc_sng #(.M(M), .NB(C4_NB)) u_c4 (.count(count), .value(K4), .bit_o(c4));

  sc_delay #(.DEPTH(D1)) u_d1 (.clk, .rst_n, .clr, .en, .d(xs), .q(x_d1));
  sc_delay #(.DEPTH(D2)) u_d2 (.clk, .rst_n, .clr, .en, .d(i1), .q(i1_d2));
  sc_delay #(.DEPTH(D3)) u_d3 (.clk, .rst_n, .clr, .en, .d(i1), .q(i1_d3));
  sc_delay #(.DEPTH(D4)) u_d4 (.clk, .rst_n, .clr, .en, .d(i1), .q(i1_d4));

  always_comb begin
    i1 = xs & x_d1;
    i2 = ~(c1 & i1);
    i3 = ~(c2 & i1_d2 & i2);
    i4 = ~(c3 & i1_d3 & i3);
    y  = ~(c4 & i1_d4 & i4);
  end

endmodule
