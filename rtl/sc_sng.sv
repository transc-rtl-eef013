// sc_sng -- stochastic number generator: comparator against one VDC view of
// the shared counter.
//
// Each cycle the bit is 1 when value/2^M > R, where R is the VDC-2^NB number
// derived from the current counter value (vdc_reorder). Over one period of
// N = 2^M counter values the stream therefore holds exactly as many 1s as the
// VDC-2^NB sequence has points below value/2^M -- value itself for every base,
// since each base visits each of its points once. The comparator direction
// (X > R) is the paper's; left-aligning value to 2M bits matches the fraction
// format of vdc_reorder. Combinational, no latency.
module sc_sng #(
  parameter int unsigned M  = 10,
  parameter int unsigned NB = 1
) (
  input  logic [M-1:0] count,
  input  logic [M-1:0] value,
  output logic         bit_o
);

  logic [2*M-1:0] r;

  vdc_reorder #(.M(M), .NB(NB)) u_reorder (.count(count), .r(r));

  assign bit_o = {value, {M{1'b0}}} > r;

endmodule
