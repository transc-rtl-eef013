// tb_vdc_reorder -- checks the hardwired VDC-2^n reordering for every digit
// width n = 1..10 with M = 10 (including widths that need zero padding, such
// as 3, 4, 6, 7, 8, 9) against the arithmetic radical inverse of
// sc_ref_pkg, for every counter value. Also checks that each base visits
// N distinct values in one period.
module tb_vdc_reorder;
  import sc_ref_pkg::*;

  localparam int M = 10;
  localparam int N = 1 << M;

  logic [M-1:0]   count = '0;
  logic [2*M-1:0] r [1:M];

  int checks = 0;
  int failures = 0;

  for (genvar nb = 1; nb <= M; nb++) begin : g_nb
    vdc_reorder #(.M(M), .NB(nb)) dut (.count(count), .r(r[nb]));
  end

  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (4 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen [1:M][int];
    for (int c = 0; c < N; c++) begin
      count = M'(c);
      #1;
      for (int nb = 1; nb <= M; nb++) begin
        real got;
        got = real'(r[nb]) / (2.0 ** (2 * M));
        checks++;
        if (got != vdc_frac(c, nb, M)) begin
          failures++;
          if (failures < 10) $display("nb=%0d c=%0d: %f expected %f", nb, c, got, vdc_frac(c, nb, M));
        end
        seen[nb][int'(r[nb])] = 1'b1;
      end
      @(posedge clk);
    end
    for (int nb = 1; nb <= M; nb++) begin
      checks++;
      if (seen[nb].num() != N) begin
        failures++;
        $display("nb=%0d: %0d distinct values", nb, seen[nb].num());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
