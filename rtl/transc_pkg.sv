// transc_pkg -- constants and helpers shared by the stochastic transcendental
// function units.
//
// Every unit encodes numbers in [0,1) as unipolar bit-streams of N = 2^M bits.
// A binary constant c is encoded by comparing round(c * 2^M) against a
// quasi-random number, exactly like the scalar input x. coef_q() computes that
// binary value from an exact fraction num/den at elaboration time, so that
// the coefficient tables of the nine circuits can be written as the fractions
// of their Maclaurin/Horner forms. The rounding rule is this design's choice.
// func_e names the nine outputs of the top level in a fixed order.
package transc_pkg;

  // Default stream length exponent: N = 2^10 = 1024 bits.
  parameter int unsigned M_DEFAULT = 10;

  typedef enum logic [3:0] {
    F_SIN     = 4'd0,
    F_COS     = 4'd1,
    F_TAN     = 4'd2,
    F_TANH    = 4'd3,
    F_ATAN    = 4'd4,
    F_SIGMOID = 4'd5,
    F_SINC    = 4'd6,
    F_EXPNEG  = 4'd7,
    F_LN1P    = 4'd8
  } func_e;

  parameter int unsigned NUM_FUNCS = 9;

  // round(num/den * 2^m), the M-bit binary value of a coefficient.
  function automatic int unsigned coef_q(int unsigned num, int unsigned den, int unsigned m);
    longint unsigned scaled;
    scaled = (longint'(num) << m) + (longint'(den) >> 1);
    return int'(scaled / longint'(den));
  endfunction

endpackage
