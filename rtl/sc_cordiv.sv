// sc_cordiv -- correlated stochastic divider (CORDIV): q = dividend / divisor.
//
// One 2:1 multiplexer and one D flip-flop. When the divisor bit is 1 the
// output is the dividend bit; when it is 0 the output repeats the last
// output bit, held in the flip-flop:
//   q = divisor ? dividend : q_prev
// With the dividend's 1s a subset of the divisor's 1s (maximally correlated
// streams, see sc_correlator), the fraction of 1s in q approaches
// P(dividend)/P(divisor). The quotient cannot exceed 1. The structure is the
// paper's; clearing the flip-flop to 0 at the start is this design's choice.
// q is combinational; the flip-flop advances on enabled cycles.
module sc_cordiv (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  logic dividend,
  input  logic divisor,
  output logic q
);

  logic q_prev;

  assign q = divisor ? dividend : q_prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   q_prev <= 1'b0;
    else if (clr) q_prev <= 1'b0;
    else if (en)  q_prev <= q;
  end

endmodule
