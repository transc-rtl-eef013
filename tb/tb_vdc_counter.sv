// tb_vdc_counter -- checks the shared up counter: reset value, counting one
// step per enabled cycle, holding when disabled, wrap-around after 2^M steps
// (one stream period) and synchronous clear.
module tb_vdc_counter;
  localparam int M = 10;
  localparam int N = 1 << M;

  logic         clk = 1'b0;
  logic         rst_n = 1'b1;
  logic         clr = 1'b0;
  logic         en = 1'b0;
  logic [M-1:0] count;

  int checks = 0;
  int failures = 0;
  int expect_v;

  vdc_counter dut (.clk, .rst_n, .clr, .en, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (5 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int e);
    checks++;
    if (int'(count) != e) begin
      failures++;
      $display("count=%0d expected %0d", count, e);
    end
  endtask

  initial begin
    #1 rst_n = 1'b0;   // asynchronous reset edge
    #1;
    chk(0);
    @(negedge clk);
    rst_n = 1'b1;
    expect_v = 0;
    for (int t = 0; t < 2 * N + 7; t++) begin
      en = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (en) expect_v = (expect_v + 1) % N;
      chk(expect_v);
    end
    clr = 1'b1;
    en  = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    chk(0);
    en = 1'b1;
    repeat (N) @(negedge clk);
    chk(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
