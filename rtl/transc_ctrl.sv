// transc_ctrl -- sequencer for one evaluation of all function circuits.
//
// start (in IDLE) leads to:
//   CLEAR  1 cycle : clr = 1 (counter, delays, decoders, correlator, divider)
//   RUN1   N cycles: en = 1, phase2 = 0 -- every circuit streams one period;
//                    the tan correlator counts its sin stream
//   LOAD   1 cycle : load = 1, en = 0 (the counter has wrapped to 0)
//   RUN2   N cycles: en = 1, phase2 = 1 -- the tan divider streams one period
//   FINISH 1 cycle : done = 1, results valid from this cycle on
// for a latency of 2N + 3 cycles from start to done. A period ends when the
// shared counter reaches N-1. busy is high from CLEAR to FINISH; start is
// ignored while busy. This handshake and the state sequence are this design's
// own: the paper describes the circuits, not their control.
// Lint reports rst_n as used both asynchronously and synchronously: the
// synchronous use is only the "disable iff" of the assertions below, which
// are not hardware.
module transc_ctrl #(
  parameter int unsigned M = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] count,
  output logic         clr,
  output logic         en,
  output logic         phase2,
  output logic         load,
  output logic         busy,
  output logic         done
);

  typedef enum logic [2:0] {
    S_IDLE   = 3'd0,
    S_CLEAR  = 3'd1,
    S_RUN1   = 3'd2,
    S_LOAD   = 3'd3,
    S_RUN2   = 3'd4,
    S_FINISH = 3'd5
  } state_e;

  state_e state, state_nx;
  logic   last;

  assign last = (count == {M{1'b1}});

  always_comb begin
    state_nx = state;
    unique case (state)
      S_IDLE:   if (start) state_nx = S_CLEAR;
      S_CLEAR:  state_nx = S_RUN1;
      S_RUN1:   if (last) state_nx = S_LOAD;
      S_LOAD:   state_nx = S_RUN2;
      S_RUN2:   if (last) state_nx = S_FINISH;
      S_FINISH: state_nx = S_IDLE;
      default:  state_nx = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_nx;
  end

  always_comb begin
    clr    = (state == S_CLEAR);
    en     = (state == S_RUN1) || (state == S_RUN2);
    phase2 = (state == S_RUN2);
    load   = (state == S_LOAD);
    busy   = (state != S_IDLE);
    done   = (state == S_FINISH);
  end

  // a period starts from counter value 0
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_LOAD) |-> count == '0);

endmodule
