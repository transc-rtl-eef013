// sc_correlator -- re-encodes a bit-stream so that it is maximally correlated
// with a reference stream (the "SC correlator" in front of the tan divider).
//
// Phase 1 (cnt_en): an up counter converts stream a back to binary by
// counting its 1s over one period. load moves that count into a down
// counter (and clears the up counter). Phase 2 (gen_en): each cycle
//   a_corr = ref_bit AND NOT zero
// and every emitted 1 decrements the down counter (the AND output is also its
// enable). The regenerated stream therefore has the same number of 1s as a
// (as long as ref_bit has at least that many) and all of them coincide with
// 1s of ref_bit, which is what the CORDIV divider needs. zero flags an empty
// down counter: once it is set, further ref_bit 1s are dropped.
// The up/down counter pair, the AND gate and the Zero output follow the
// paper's drawing; running the two phases one after the other, each one
// period long, is this design's sequencing. Counters are M+1 bits so a full
// count of N fits. a_corr is combinational; counters are registered.
// Lint reports rst_n as used both asynchronously and synchronously: the
// synchronous use is only the "disable iff" of the assertions below, which
// are not hardware.
module sc_correlator #(
  parameter int unsigned M = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic cnt_en,
  input  logic load,
  input  logic gen_en,
  input  logic a,
  input  logic ref_bit,
  output logic a_corr,
  output logic zero
);

  logic [M:0] up_cnt;
  logic [M:0] dn_cnt;

  assign zero   = (dn_cnt == '0);
  assign a_corr = gen_en & ref_bit & ~zero;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_cnt <= '0;
      dn_cnt <= '0;
    end else if (clr) begin
      up_cnt <= '0;
      dn_cnt <= '0;
    end else if (load) begin
      dn_cnt <= up_cnt;
      up_cnt <= '0;
    end else begin
      if (cnt_en && a) up_cnt <= up_cnt + 1'b1;
      if (a_corr)      dn_cnt <= dn_cnt - 1'b1;
    end
  end

  // the down counter can never wrap below zero
  assert property (@(posedge clk) disable iff (!rst_n) a_corr |-> dn_cnt != '0);
  // the two phases are exclusive
  assert property (@(posedge clk) disable iff (!rst_n) !(cnt_en && gen_en));

endmodule
