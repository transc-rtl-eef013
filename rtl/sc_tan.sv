// sc_tan -- stochastic tan(x) = sin(x)/cos(x) circuit, x in [0,1).
//
// A sin circuit and a cos circuit (each with the tan-specific VDC bases and
// delays of the paper) feed a correlator and a CORDIV divider:
//   phase 1 (one period, phase2 = 0): the correlator counts the sin stream;
//   load: the count moves to the correlator's down counter;
//   phase 2 (one period, phase2 = 1): the correlator emits a copy of sin that
//     is maximally correlated with the (regenerated) cos stream, and CORDIV
//     divides it by cos.
// Because every stream is a fixed function of the shared counter, the cos
// stream of phase 2 repeats that of phase 1, so no storage of streams is
// needed. y is valid in phase 2 only; over that period its 1s count
// N * tan(x) for x up to about pi/4 and saturate towards N beyond, where
// sin(x) > cos(x). corr_zero exposes the correlator's empty flag.
// Structure (sin, cos, up counter, down counter, AND, CORDIV) follows the
// paper; the two-phase sequencing is this design's.
module sc_tan
  import transc_pkg::*;
#(
  parameter int unsigned M       = 10,
  // sin part: input VDC-8, coefficients VDC-128,128,128, delays 3,0,0,1
  parameter int unsigned S_IN_NB = 3,
  parameter int unsigned S_C1_NB = 7,
  parameter int unsigned S_C2_NB = 7,
  parameter int unsigned S_C3_NB = 7,
  parameter int unsigned S_D1    = 3,
  parameter int unsigned S_D2    = 0,
  parameter int unsigned S_D3    = 0,
  parameter int unsigned S_D4    = 1,
  // cos part: input VDC-4, coefficients VDC-16,8,2,128, delays 3,0,0,2
  parameter int unsigned C_IN_NB = 2,
  parameter int unsigned C_C1_NB = 4,
  parameter int unsigned C_C2_NB = 3,
  parameter int unsigned C_C3_NB = 1,
  parameter int unsigned C_C4_NB = 7,
  parameter int unsigned C_D1    = 3,
  parameter int unsigned C_D2    = 0,
  parameter int unsigned C_D3    = 0,
  parameter int unsigned C_D4    = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic         phase2,
  input  logic         load,
  input  logic [M-1:0] count,
  input  logic [M-1:0] x,
  output logic         y,
  output logic         corr_zero
);

  logic sin_s, cos_s, sin_corr;

  sc_sin #(
    .M(M), .IN_NB(S_IN_NB), .C1_NB(S_C1_NB), .C2_NB(S_C2_NB), .C3_NB(S_C3_NB),
    .D1(S_D1), .D2(S_D2), .D3(S_D3), .D4(S_D4)
  ) u_sin (
    .clk, .rst_n, .clr, .en, .count, .x, .y(sin_s)
  );

  sc_cos #(
    .M(M), .IN_NB(C_IN_NB), .C1_NB(C_C1_NB), .C2_NB(C_C2_NB), .C3_NB(C_C3_NB),
    .C4_NB(C_C4_NB), .D1(C_D1), .D2(C_D2), .D3(C_D3), .D4(C_D4)
  ) u_cos (
    .clk, .rst_n, .clr, .en, .count, .x, .y(cos_s)
  );

  sc_correlator #(.M(M)) u_corr (
    .clk, .rst_n, .clr,
    .cnt_en (en & ~phase2),
    .load   (load),
    .gen_en (en & phase2),
    .a      (sin_s),
    .ref_bit(cos_s),
    .a_corr (sin_corr),
    .zero   (corr_zero)
  );

  sc_cordiv u_div (
    .clk, .rst_n, .clr,
    .en      (en & phase2),
    .dividend(sin_corr),
    .divisor (cos_s),
    .q       (y)
  );

endmodule
