// tb_sc_decoder -- checks the ones counter: random streams over a full
// period, an all-ones stream (count N needs the extra bit), enable gating and
// clear. The count is compared with a software count after every cycle and
// at the end of each period; the reset value is checked too.
module tb_sc_decoder;
  localparam int M = 10;
  localparam int N = 1 << M;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       clr = 1'b0;
  logic       en = 1'b0;
  logic       bit_i = 1'b0;
  logic [M:0] pop;

  int checks = 0;
  int failures = 0;

  sc_decoder dut (.clk, .rst_n, .clr, .en, .bit_i, .pop);

  always #5 clk = ~clk;

  initial begin
    repeat (10 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (pop != '0) failures++;
    rst_n = 1'b1;
    for (int run = 0; run < 5; run++) begin
      int ones;
      clr = 1'b1;
      @(negedge clk);
      clr  = 1'b0;
      ones = 0;
      for (int t = 0; t < N; t++) begin
        en    = (run == 4) ? 1'b1 : ($urandom_range(0, 7) != 0);
        bit_i = (run == 4) ? 1'b1 : 1'($urandom);
        if (en && bit_i) ones++;
        @(negedge clk);
        // running count, every cycle
        checks++;
        if (int'(pop) != ones) failures++;
      end
      en = 1'b0;
      checks++;
      if (int'(pop) != ones) begin
        failures++;
        $display("run %0d: pop=%0d expected %0d", run, pop, ones);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
