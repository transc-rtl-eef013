// tb_transc_pkg -- checks transc_pkg::coef_q, the rounding of every
// coefficient fraction used by the function circuits, against real
// arithmetic for stream lengths 2^4 .. 2^12, and the function index order.
module tb_transc_pkg;
  import transc_pkg::*;
  import sc_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  int nums [22] = '{1, 1, 1, 1, 1, 1, 1, 17, 2, 5, 3, 1, 1, 1, 1, 1, 4, 3, 2, 1, 1, 1};
  int dens [22] = '{42, 20, 6, 56, 30, 12, 2, 42, 5, 21, 5, 3, 10, 12, 5, 4, 5, 4, 3, 2, 7, 9};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 4; m <= 12; m++) begin
      for (int i = 0; i < 22; i++) begin
        checks++;
        if (coef_q(nums[i], dens[i], m) != q(nums[i], dens[i], m)) begin
          failures++;
          $display("coef_q(%0d,%0d,%0d) = %0d, expected %0d", nums[i], dens[i], m,
                   coef_q(nums[i], dens[i], m), q(nums[i], dens[i], m));
        end
      end
    end
    checks++;
    if (int'(F_TAN) != 2 || int'(F_LN1P) != NUM_FUNCS - 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
