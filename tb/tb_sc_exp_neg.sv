// tb_sc_exp_neg -- self-checking testbench for sc_exp_neg (default parameters, N = 1024).
//
// For every input x = 0..N-1 it clears the circuit, streams one period of the
// counter (count = 0..N-1) and compares each output bit with a reference
// stream computed from sc_ref_pkg (arithmetic VDC numbers, the gate equations
// of the circuit and explicit bit histories for the delays). It also checks
// that the output is valid one bit per cycle (N cycles per value), and that the
// mean squared error against the real function over all inputs equals the
// value the reference model gives (6.2400 e-4; the paper reports 3.032 e-4).
module tb_sc_exp_neg;
  import sc_ref_pkg::*;

  localparam int M = 10;
  localparam int N = 1 << M;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         clr = 1'b0;
  logic         en = 1'b0;
  logic [M-1:0] count = '0;
  logic [M-1:0] x = '0;
  logic         y;

  int checks = 0;
  int failures = 0;

  bit xs_h [N];
  bit i1_h [N];

  sc_exp_neg dut (.clk, .rst_n, .clr, .en, .count, .x, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (N * (N + 4) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // delayed input / delayed i1 at bit t, zero before the start of the run
  function automatic bit dx(int t, int k);
    return (t - k < 0) ? 1'b0 : xs_h[t-k];
  endfunction
  function automatic bit di(int t, int k);
    return (t - k < 0) ? 1'b0 : i1_h[t-k];
  endfunction

  function automatic real ref_f(real v);
    return $exp(-v);
  endfunction

  initial begin
    int  ones, mism, first_bad, cyc0;
    bit  xs, i1, ry;
    bit  c1, c2, c3, c4;
    bit  s1, s2, s3, s4;
    real se, mse;
    se = 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int xv = 0; xv < N; xv++) begin
      @(negedge clk);
      x   = M'(xv);
      clr = 1'b1;
      en  = 1'b0;
      @(negedge clk);
      clr  = 1'b0;
      en   = 1'b1;
      ones = 0;
      mism = 0;
      first_bad = -1;
      cyc0 = $time;
      for (int t = 0; t < N; t++) begin
        count = M'(t);
        #1;
        xs = sng(xv, t, 7, M);
        xs_h[t] = xs;
        c1 = sng(q(1, 5, M), t, 4, M);
        c2 = sng(q(1, 4, M), t, 10, M);
        c3 = sng(q(1, 3, M), t, 9, M);
        c4 = sng(q(1, 2, M), t, 9, M);
        i1 = 1'b0;
        s1 = ~(c1 & xs);
        s2 = ~(c2 & xs & s1);
        s3 = ~(c3 & xs & s2);
        s4 = ~(c4 & xs & s3);
        ry = ~(xs & s4);
        if (y !== ry) begin
          mism++;
          if (first_bad < 0) first_bad = t;
        end
        ones += int'(y);
        @(negedge clk);
      end
      en = 1'b0;
      checks++;
      if (mism != 0) begin
        failures++;
        if (failures < 5) $display("x=%0d: %0d stream bits differ, first at bit %0d", xv, mism, first_bad);
      end
      checks++;
      if (($time - cyc0) / 10 != N) begin
        failures++;
        $display("x=%0d: took %0d cycles, expected %0d", xv, ($time - cyc0) / 10, N);
      end
      se = se + (real'(ones) / N - ref_f(real'(xv) / N)) ** 2;
    end
    mse = se / N * 1.0e4;
    $display("sc_exp_neg: MSE over all %0d inputs = %0.4f e-4 (expected 6.2400, paper 3.032)", N, mse);
    checks++;
    if (absr(mse - 6.2400) > 0.01 * 6.2400 + 0.001) begin
      failures++;
      $display("MSE mismatch");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
