// vdc_reorder -- hardwired Van der Corput base-2^NB view of the counter.
//
// The M-bit counter value is split into NB-bit digit groups starting at the
// LSB; the last (most significant) group is zero-padded to NB bits when M is
// not a multiple of NB. The group order is then reversed: the least
// significant group becomes the most significant. Read as a binary fraction of
// W = NB*ceil(M/NB) bits this is the base-2^NB radical inverse of the counter
// value, i.e. the VDC-2^NB sequence. NB = 1 is plain bit reversal (VDC-2) and
// NB = M is the counter itself.
// The output is left-aligned in 2M bits so that every base has the same
// fraction format and no padded digit is lost (W < 2M); the left alignment is
// this design's choice, the grouping and reversal follow the paper.
// Purely combinational wiring: no gates, no timing.
module vdc_reorder #(
  parameter int unsigned M  = 10,
  parameter int unsigned NB = 1
) (
  input  logic [M-1:0]   count,
  output logic [2*M-1:0] r
);

  localparam int unsigned G = (M + NB - 1) / NB;  // number of digit groups
  localparam int unsigned W = NB * G;             // padded width

  logic [W-1:0] padded;
  logic [W-1:0] rev;

  assign padded = W'(count);

  // group k of the counter (k = 0 is least significant) becomes
  // group G-1-k of the result
  for (genvar k = 0; k < G; k++) begin : g_grp
    assign rev[(G-1-k)*NB +: NB] = padded[k*NB +: NB];
  end

  assign r = {rev, {(2*M-W){1'b0}}};

  initial begin
    assert (NB >= 1 && NB <= M) else $error("vdc_reorder: NB must be in 1..M");
  end

endmodule
