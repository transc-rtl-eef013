// tb_sc_tan -- self-checking testbench for sc_tan (default parameters,
// N = 1024).
//
// For every input x it clears the circuit, streams one period with
// phase2 = 0, pulses load, streams a second period with phase2 = 1 and counts
// the output 1s of the second period. The count must equal the reference of
// sc_ref_pkg::ref_count (which models sin, cos, the correlator and CORDIV
// independently). The mean squared error against tan(x) over the inputs
// where tan(x) <= 1 (x < pi/4) must equal the model value 0.8530e-4 (the
// paper reports 0.721e-4). Inputs above pi/4 must saturate close to N.
module tb_sc_tan;
  import sc_ref_pkg::*;

  localparam int M = 10;
  localparam int N = 1 << M;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         clr = 1'b0;
  logic         en = 1'b0;
  logic         phase2 = 1'b0;
  logic         load = 1'b0;
  logic [M-1:0] count = '0;
  logic [M-1:0] x = '0;
  logic         y;
  logic         corr_zero;

  int checks = 0;
  int failures = 0;

  sc_tan dut (.clk, .rst_n, .clr, .en, .phase2, .load, .count, .x, .y, .corr_zero);

  always #5 clk = ~clk;

  initial begin
    repeat (N * (2 * N + 8) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  ones, r, lim, zero_seen;
    real se, mse;
    se  = 0.0;
    lim = 0;
    zero_seen = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int xv = 0; xv < N; xv++) begin
      x   = M'(xv);
      clr = 1'b1;
      @(negedge clk);
      clr    = 1'b0;
      en     = 1'b1;
      phase2 = 1'b0;
      for (int t = 0; t < N; t++) begin
        count = M'(t);
        @(negedge clk);
      end
      en    = 1'b0;
      load  = 1'b1;
      count = '0;
      @(negedge clk);
      load   = 1'b0;
      en     = 1'b1;
      phase2 = 1'b1;
      ones   = 0;
      for (int t = 0; t < N; t++) begin
        count = M'(t);
        #1;
        ones += int'(y);
        @(negedge clk);
      end
      if (corr_zero) zero_seen++;
      en     = 1'b0;
      phase2 = 1'b0;
      r = ref_count(2, xv, M);
      checks++;
      if (ones != r) begin
        failures++;
        if (failures < 5) $display("x=%0d: %0d ones, reference %0d", xv, ones, r);
      end
      if (real'(xv) / N < 0.7853981633974483) begin
        se = se + (real'(ones) / N - $tan(real'(xv) / N)) ** 2;
        lim++;
      end else begin
        checks++;
        if (ones < N - 32) begin
          failures++;
          $display("x=%0d: %0d ones, expected saturation", xv, ones);
        end
      end
    end
    mse = se / lim * 1.0e4;
    $display("sc_tan: MSE over %0d inputs below pi/4 = %0.4f e-4 (model 0.8530, paper 0.721)", lim, mse);
    checks++;
    if (absr(mse - 0.8530) > 0.01) failures++;
    checks++;
    if (zero_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
