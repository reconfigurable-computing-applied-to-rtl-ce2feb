// Self-checking testbench of fp_mul: random normal operands, compared bit for
// bit with the correctly rounded double-precision product (a product of two
// F32 values is exact in double, so rounding it once to F32 is the reference).
// Also checks signed zero operands and overflow to infinity.
module tb_fp_mul;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp_mul dut (.a(a), .b(b), .y(y));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [31:0] exp_y, string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h * %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    for (int i = 0; i < 20000; i++) begin
      a = {1'($urandom), 8'(100 + $urandom_range(0, 54)), 23'($urandom)};
      b = {1'($urandom), 8'(100 + $urandom_range(0, 54)), 23'($urandom)};
      #1;
      check(r2f(f2r(a) * f2r(b)), "random");
      @(posedge clk);
    end
    a = 32'h0000_0000; b = 32'h3f80_0000; #1; check(32'h0000_0000, "zero");
    a = 32'h7f00_0000; b = 32'h4000_0000; #1; check(32'h7f80_0000, "overflow");
    a = 32'h3fc0_0000; b = 32'hc000_0000; #1; check(32'hc040_0000, "1.5*-2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
