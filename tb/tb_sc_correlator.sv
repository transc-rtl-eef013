// tb_sc_correlator -- self-checking testbench for sc_correlator (M = 10).
//
// Each trial clears the block, feeds a random stream a for one period of
// N cycles with cnt_en, pulses load, and then feeds a random reference stream
// for N cycles with gen_en. A cycle model of the up and down counters
// predicts every a_corr and zero bit. On top of the bit-exact compare it
// checks the properties the correlator exists for: a_corr only where the
// reference is 1, and exactly min(ones(a), ones(ref)) ones re-emitted.
// Trials cover both a sparse reference (the counter never empties) and a
// dense one (it empties early), and the count of each case is checked.
module tb_sc_correlator;
  localparam int M = 10;
  localparam int N = 1 << M;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic cnt_en = 1'b0;
  logic load = 1'b0;
  logic gen_en = 1'b0;
  logic a = 1'b0;
  logic ref_bit = 1'b0;
  logic a_corr;
  logic zero;

  int checks = 0;
  int failures = 0;

  sc_correlator #(.M(M)) dut (.clk, .rst_n, .clr, .cnt_en, .load, .gen_en, .a, .ref_bit,
                              .a_corr, .zero);

  always #5 clk = ~clk;

  initial begin
    repeat (40 * (2 * N + 4)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int emptied, not_emptied;
    emptied = 0;
    not_emptied = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 32; k++) begin
      int pa, pr, na, nr, nout, dn, bad;
      pa = $urandom_range(0, 100);
      pr = (k % 2 == 0) ? $urandom_range(0, 100) : 100 - pa / 2;
      clr = 1'b1;
      @(negedge clk);
      clr    = 1'b0;
      cnt_en = 1'b1;
      na = 0;
      for (int t = 0; t < N; t++) begin
        a = ($urandom_range(0, 99) < pa);
        na += int'(a);
        @(negedge clk);
      end
      cnt_en = 1'b0;
      a      = 1'b0;
      load   = 1'b1;
      @(negedge clk);
      load   = 1'b0;
      gen_en = 1'b1;
      dn = na;
      nr = 0;
      nout = 0;
      bad = 0;
      for (int t = 0; t < N; t++) begin
        bit exp_o;
        ref_bit = ($urandom_range(0, 99) < pr);
        #1;
        exp_o = ref_bit && (dn != 0);
        if (a_corr != exp_o || zero != (dn == 0)) bad++;
        if (a_corr && !ref_bit) bad++;
        nr   += int'(ref_bit);
        nout += int'(a_corr);
        if (exp_o) dn--;
        @(negedge clk);
      end
      gen_en  = 1'b0;
      ref_bit = 1'b0;
      checks += 2;
      if (bad != 0) begin
        failures++;
        $display("trial %0d: %0d cycle mismatches", k, bad);
      end
      if (nout != ((na < nr) ? na : nr)) begin
        failures++;
        $display("trial %0d: %0d ones out, a had %0d, ref %0d", k, nout, na, nr);
      end
      if (na < nr) emptied++;
      else not_emptied++;
    end
    $display("sc_correlator: %0d trials emptied the counter, %0d did not", emptied, not_emptied);
    checks += 2;
    if (emptied == 0) failures++;
    if (not_emptied == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
