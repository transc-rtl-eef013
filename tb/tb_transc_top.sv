// tb_transc_top -- end-to-end testbench of transc_top at its default size
// (M = 10, streams of N = 1024 bits); it is also the full-size test.
//
// Each evaluation pulses start with an input x, then keeps changing the x
// port and pulses start again while the unit is busy (both must be ignored),
// waits for done and compares all nine decoded results with the
// cycle-accurate reference of sc_ref_pkg::ref_count. It also checks the
// latency (done 2N + 3 cycles after the start cycle, done lasting one cycle),
// and that every result stays within 0.2 of the real function (tan only below
// pi/4, where tan(x) <= 1; above it the quotient saturates near 1).
//
// Mechanisms counted, each must occur at least once: period-1 evaluation,
// load of the correlator, period-2 (tan) evaluation, a start ignored while
// busy, back-to-back evaluations with start held high, the correlator
// emptying before the end of period 2, the correlator not emptying
// (saturating tan), and the CORDIV holding its previous bit where the cos
// stream is 0.
module tb_transc_top;
  import sc_ref_pkg::*;

  localparam int M  = 10;
  localparam int N  = 1 << M;
  localparam int NF = 9;
  localparam int NX = 64;

  logic         clk = 1'b0;
  logic         rst_n = 1'b1;
  logic         start = 1'b0;
  logic [M-1:0] x = '0;
  logic         busy;
  logic         done;
  logic         tan_corr_zero;
  logic [M:0]   result [NF];

  int checks = 0;
  int failures = 0;

  int n_period1 = 0;
  int n_load = 0;
  int n_period2 = 0;
  int n_ignored = 0;
  int n_back2back = 0;
  int n_emptied = 0;
  int n_not_emptied = 0;
  int n_cordiv_hold = 0;

  transc_top dut (.clk, .rst_n, .start, .x, .busy, .done, .tan_corr_zero, .result);

  always #5 clk = ~clk;

  // internal events, observed through the hierarchy
  always @(posedge clk) begin
    if (dut.en && !dut.phase2 && dut.count == '0) n_period1++;
    if (dut.load) n_load++;
    if (dut.en && dut.phase2 && dut.count == '0) n_period2++;
    if (dut.en && dut.phase2 && !dut.u_tan.cos_s) n_cordiv_hold++;
  end

  initial begin
    repeat ((NX + 4) * (2 * N + 8)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fref(int fn, real v);
    case (fn)
      0: return $sin(v);
      1: return $cos(v);
      2: return $tan(v);
      3: return (($exp(v) - $exp(-v)) / ($exp(v) + $exp(-v)));
      4: return $atan(v);
      5: return 1.0 / (1.0 + $exp(-v));
      6: return (v == 0.0) ? 1.0 : $sin(v) / v;
      7: return $exp(-v);
      default: return $ln(1.0 + v);
    endcase
  endfunction

  // compare the nine results of one evaluation with the references
  task automatic check_results(int xv);
    real v;
    v = real'(xv) / N;
    for (int f = 0; f < NF; f++) begin
      int  r;
      real err;
      r = ref_count(f, xv, M);
      checks++;
      if (int'(result[f]) != r) begin
        failures++;
        $display("x=%0d function %0d: result %0d, reference %0d", xv, f, result[f], r);
      end
      if (f != 2 || v < 0.7853981633974483) begin
        err = real'(result[f]) / N - fref(f, v);
        checks++;
        if (err > 0.2 || err < -0.2) begin
          failures++;
          $display("x=%0d function %0d: error %0.3f", xv, f, err);
        end
      end
    end
    if (tan_corr_zero) n_emptied++;
    else n_not_emptied++;
  endtask

  initial begin
    int xs [NX];
    xs[0] = 0;
    xs[1] = N - 1;
    xs[2] = N / 2;
    xs[3] = 700;
    xs[4] = 900;
    for (int k = 5; k < NX; k++) xs[k] = $urandom_range(0, N - 1);

    #1 rst_n = 1'b0;
    #1;
    checks++;
    if (busy || done) failures++;
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // single evaluations with disturbance while busy
    for (int k = 0; k < NX - 2; k++) begin
      int lat;
      x     = M'(xs[k]);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!done && lat < 3 * N) begin
        x = M'($urandom_range(0, N - 1));
        if (lat == 50 + k) begin
          start = 1'b1;
          n_ignored++;
        end else begin
          start = 1'b0;
        end
        @(negedge clk);
        lat++;
      end
      start = 1'b0;
      checks++;
      if (lat != 2 * N + 3) begin
        failures++;
        $display("x=%0d: done after %0d cycles, expected %0d", xs[k], lat, 2 * N + 3);
      end
      check_results(xs[k]);
      @(negedge clk);
      checks++;
      if (done || busy) failures++;   // done is a one-cycle pulse
      check_results(xs[k]);           // results hold after done
    end

    // two evaluations back to back with start held high
    x     = M'(xs[NX - 2]);
    start = 1'b1;
    @(negedge clk);
    x = M'(xs[NX - 1]);
    while (!done) @(negedge clk);
    check_results(xs[NX - 2]);
    @(negedge clk);                   // idle cycle with start high: x latched
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (!busy) failures++;
    else n_back2back++;
    while (!done) @(negedge clk);
    check_results(xs[NX - 1]);

    $display("period-1 runs %0d, loads %0d, period-2 runs %0d, ignored starts %0d",
             n_period1, n_load, n_period2, n_ignored);
    $display("back-to-back %0d, correlator emptied %0d, not emptied %0d, CORDIV hold cycles %0d",
             n_back2back, n_emptied, n_not_emptied, n_cordiv_hold);
    checks += 8;
    if (n_period1 == 0) failures++;
    if (n_load == 0) failures++;
    if (n_period2 == 0) failures++;
    if (n_ignored == 0) failures++;
    if (n_back2back == 0) failures++;
    if (n_emptied == 0) failures++;
    if (n_not_emptied == 0) failures++;
    if (n_cordiv_hold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
