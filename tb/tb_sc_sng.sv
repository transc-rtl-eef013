// tb_sc_sng -- checks the comparator-based stream generator for several VDC
// bases: each bit against the reference value/2^M > R, and that one period of
// N bits holds exactly value ones (within one for the zero-padded base 8), for random
// values.
module tb_sc_sng;
  import sc_ref_pkg::*;

  localparam int M = 10;
  localparam int N = 1 << M;

  logic [M-1:0] count = '0;
  logic [M-1:0] value = '0;
  logic         b2, b8, b1024;

  int checks = 0;
  int failures = 0;

  sc_sng #(.M(M), .NB(1))  dut2    (.count, .value, .bit_o(b2));
  sc_sng #(.M(M), .NB(3))  dut8    (.count, .value, .bit_o(b8));
  sc_sng #(.M(M), .NB(10)) dut1024 (.count, .value, .bit_o(b1024));

  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (40 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 24; k++) begin
      int v, n2, n8, n1024, bad;
      v = (k < 4) ? k * (N - 1) / 3 : $urandom_range(0, N - 1);
      value = M'(v);
      n2 = 0; n8 = 0; n1024 = 0; bad = 0;
      for (int c = 0; c < N; c++) begin
        count = M'(c);
        #1;
        if (b2 != sng(v, c, 1, M) || b8 != sng(v, c, 3, M) || b1024 != sng(v, c, 10, M)) bad++;
        n2 += int'(b2);
        n8 += int'(b8);
        n1024 += int'(b1024);
        @(posedge clk);
      end
      checks += 4;
      if (bad != 0) failures++;
      if (n2 != v) failures++;
      // base 8 does not divide M = 10: the zero-padded last digit makes the
      // sequence slightly non-uniform, one 1 more or less is expected
      if (n8 - v > 1 || v - n8 > 1) failures++;
      if (n1024 != v) failures++;
      if (bad != 0 || n2 != v || n8 - v > 1 || v - n8 > 1 || n1024 != v)
        $display("value=%0d: bad=%0d ones %0d %0d %0d", v, bad, n2, n8, n1024);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
