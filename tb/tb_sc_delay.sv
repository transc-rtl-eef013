// tb_sc_delay -- checks delay elements of depth 0, 1, 2 and 3 against a
// history of a random input stream, including hold when en is low and the
// synchronous clear.
module tb_sc_delay;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic en = 1'b0;
  logic d = 1'b0;
  logic q0, q1, q2, q3;

  int checks = 0;
  int failures = 0;
  bit hist [$];

  sc_delay #(.DEPTH(0)) dut0 (.clk, .rst_n, .clr, .en, .d, .q(q0));
  sc_delay #(.DEPTH(1)) dut1 (.clk, .rst_n, .clr, .en, .d, .q(q1));
  sc_delay #(.DEPTH(2)) dut2 (.clk, .rst_n, .clr, .en, .d, .q(q2));
  sc_delay #(.DEPTH(3)) dut3 (.clk, .rst_n, .clr, .en, .d, .q(q3));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit h(int k);
    return (k >= hist.size()) ? 1'b0 : hist[hist.size() - 1 - k];
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      if (t == 1000) begin
        clr = 1'b1;
        @(negedge clk);
        clr = 1'b0;
        hist.delete();
      end
      en = ($urandom_range(0, 4) != 0);
      d  = 1'($urandom);
      #1;
      checks++;
      if (q0 != d || q1 != h(0) || q2 != h(1) || q3 != h(2)) begin
        failures++;
        if (failures < 5) $display("t=%0d d=%b q=%b%b%b%b", t, d, q0, q1, q2, q3);
      end
      @(negedge clk);
      if (en) hist.push_back(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
