// sc_delay -- decorrelating delay element: DEPTH D flip-flops in series.
//
// q is d delayed by DEPTH enabled cycles (the "kD" boxes of the function
// circuits); DEPTH = 0 is a plain wire, which is how a cancelled delay is
// expressed. Delaying a stream by k bits against itself makes the two copies
// nearly independent, so an AND of them approximates x^2.
// clr synchronously empties the chain (this design clears it at the start of
// every evaluation so results do not depend on the previous input);
// rst_n is an asynchronous active-low reset.
// With DEPTH = 0 the clock, reset, clear and enable inputs are unused (lint
// reports them); they stay so that every depth has the same ports.
module sc_delay #(
  parameter int unsigned DEPTH = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  logic d,
  output logic q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_ff
    logic [DEPTH-1:0] sr;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)   sr <= '0;
      else if (clr) sr <= '0;
      else if (en)  sr <= DEPTH'({sr, d});
    end
    assign q = sr[DEPTH-1];
  end

endmodule
