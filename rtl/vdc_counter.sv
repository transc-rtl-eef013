// vdc_counter -- the single M-bit up counter that is the only random source of
// the whole design.
//
// All quasi-random numbers are hardwired permutations of this counter (see
// vdc_reorder), so one counter serves the input and every coefficient of every
// function circuit. It counts modulo 2^M, one step per enabled cycle, so one
// stream period of N = 2^M bits is one trip through all counter values.
// Interface: synchronous clear (clr) has priority over en; rst_n is an
// asynchronous active-low reset. count is a registered output.
// The paper allows a synchronous or asynchronous (ripple) counter; a
// synchronous one is used here.
module vdc_counter #(
  parameter int unsigned M = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  output logic [M-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      count <= '0;
    else if (clr)    count <= '0;
    else if (en)     count <= count + 1'b1;
  end

endmodule
