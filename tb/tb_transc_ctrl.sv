// tb_transc_ctrl -- self-checking testbench for transc_ctrl (M = 10).
//
// The testbench plays the shared VDC counter itself (cleared by clr, stepped
// by en) and checks the controller's sequence cycle by cycle: one clear
// cycle, N cycles of period 1, one load cycle with the counter at 0, N cycles
// of period 2, one done pulse, idle again -- 2N + 3 cycles from the start
// cycle to done. A start pulse given while busy must be ignored, and a start
// held high must launch back-to-back evaluations.
module tb_transc_ctrl;
  localparam int M = 10;
  localparam int N = 1 << M;

  logic         clk = 1'b0;
  logic         rst_n = 1'b1;
  logic         start = 1'b0;
  logic [M-1:0] count = '0;
  logic         clr, en, phase2, load, busy, done;

  int checks = 0;
  int failures = 0;

  transc_ctrl #(.M(M)) dut (.clk, .rst_n, .start, .count, .clr, .en, .phase2, .load, .busy,
                            .done);

  always #5 clk = ~clk;

  // counter model
  always_ff @(posedge clk) begin
    if (clr)     count <= '0;
    else if (en) count <= count + 1'b1;
  end

  initial begin
    repeat (10 * (2 * N + 10)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_outputs(string what, bit c, bit e, bit p, bit l, bit b, bit d);
    checks++;
    if ({clr, en, phase2, load, busy, done} != {c, e, p, l, b, d}) begin
      failures++;
      if (failures < 10)
        $display("%0t %s: clr/en/phase2/load/busy/done = %b%b%b%b%b%b, expected %b%b%b%b%b%b",
                 $time, what, clr, en, phase2, load, busy, done, c, e, p, l, b, d);
    end
  endtask

  // one evaluation, checked from the cycle after the start cycle
  task automatic run_one(bit poke_start);
    expect_outputs("clear", 1, 0, 0, 0, 1, 0);
    @(negedge clk);
    for (int t = 0; t < N; t++) begin
      expect_outputs("period 1", 0, 1, 0, 0, 1, 0);
      if (poke_start && t == 100) start = 1'b1;
      @(negedge clk);
      if (poke_start) start = 1'b0;
    end
    expect_outputs("load", 0, 0, 0, 1, 1, 0);
    checks++;
    if (count != '0) failures++;
    @(negedge clk);
    for (int t = 0; t < N; t++) begin
      expect_outputs("period 2", 0, 1, 1, 0, 1, 0);
      @(negedge clk);
    end
    expect_outputs("done", 0, 0, 0, 0, 1, 1);
    @(negedge clk);
  endtask

  initial begin
    int t0, lat;
    #1 rst_n = 1'b0;
    #1;
    expect_outputs("reset", 0, 0, 0, 0, 0, 0);
    @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    expect_outputs("idle", 0, 0, 0, 0, 0, 0);

    // latency from the start cycle to done
    start = 1'b1;
    t0 = 0;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done && lat < 3 * N) begin
      @(negedge clk);
      lat++;
    end
    checks++;
    if (lat != 2 * N + 3) begin
      failures++;
      $display("done after %0d cycles, expected %0d", lat, 2 * N + 3);
    end
    @(negedge clk);
    expect_outputs("idle after done", 0, 0, 0, 0, 0, 0);

    // full sequence, with a start pulse during period 1 that must be ignored
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    run_one(1'b1);
    expect_outputs("idle after ignored start", 0, 0, 0, 0, 0, 0);

    // start held high: two evaluations back to back
    start = 1'b1;
    @(negedge clk);
    run_one(1'b0);
    @(negedge clk);    // this is the second start cycle (idle with start)
    start = 1'b0;
    run_one(1'b0);
    expect_outputs("idle at end", 0, 0, 0, 0, 0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
