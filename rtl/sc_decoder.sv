// sc_decoder -- output decoder: counts the 1s of a bit-stream.
//
// After one period of N = 2^M enabled cycles pop holds the stream's value
// times N. pop is M+1 bits wide so that a stream of all ones (N) fits.
// clr synchronously zeroes the count; rst_n is an asynchronous active-low
// reset. pop is registered: it includes the bit presented in the previous
// enabled cycle.
module sc_decoder #(
  parameter int unsigned M = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clr,
  input  logic       en,
  input  logic       bit_i,
  output logic [M:0] pop
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              pop <= '0;
    else if (clr)            pop <= '0;
    else if (en && bit_i)    pop <= pop + 1'b1;
  end

endmodule
