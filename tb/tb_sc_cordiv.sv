// tb_sc_cordiv -- self-checking testbench for sc_cordiv.
//
// A reference D flip-flop model predicts every quotient bit: where the
// divisor is 1 the dividend passes, elsewhere the previous quotient bit is
// repeated. Dividend streams are drawn as subsets of the divisor stream (the
// correlated case the unit is meant for), so the quotient density must come
// close to P(dividend)/P(divisor); this is checked to 0.03 on 4096-bit runs.
// The hold path (divisor 0) and the pass path are counted and both must occur.
module tb_sc_cordiv;
  localparam int L = 4096;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic en = 1'b0;
  logic dividend = 1'b0;
  logic divisor = 1'b0;
  logic q;

  int checks = 0;
  int failures = 0;

  sc_cordiv dut (.clk, .rst_n, .clr, .en, .dividend, .divisor, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (20 * (L + 4)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int holds, passes;
    holds = 0;
    passes = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 12; k++) begin
      int  pd, ps, nd, nv, nq, bad;
      bit  prev;
      real ratio, got;
      pd = $urandom_range(20, 100);     // divisor density, percent
      ps = $urandom_range(0, 100);      // share of divisor 1s kept by the dividend
      clr = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      en  = 1'b1;
      prev = 1'b0;
      nd = 0; nv = 0; nq = 0; bad = 0;
      for (int t = 0; t < L; t++) begin
        bit e;
        divisor  = ($urandom_range(0, 99) < pd);
        dividend = divisor && ($urandom_range(0, 99) < ps);
        #1;
        e = divisor ? dividend : prev;
        if (q != e) bad++;
        if (divisor) passes++;
        else holds++;
        prev = e;
        nd += int'(dividend);
        nv += int'(divisor);
        nq += int'(q);
        @(negedge clk);
      end
      en = 1'b0;
      // a disabled unit must keep its stored bit
      divisor = 1'b0;
      @(negedge clk);
      #1;
      checks++;
      if (q != prev) failures++;
      checks++;
      if (bad != 0) begin
        failures++;
        $display("trial %0d: %0d bit mismatches", k, bad);
      end
      ratio = (nv == 0) ? 0.0 : real'(nd) / real'(nv);
      got   = real'(nq) / L;
      checks++;
      if (got - ratio > 0.03 || ratio - got > 0.03) begin
        failures++;
        $display("trial %0d: quotient %0.3f, expected %0.3f", k, got, ratio);
      end
    end
    checks += 2;
    if (holds == 0) failures++;
    if (passes == 0) failures++;
    $display("sc_cordiv: %0d pass cycles, %0d hold cycles", passes, holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
