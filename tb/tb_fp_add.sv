// Self-checking testbench of fp_add: random operands of both signs, with
// exponents close together (cancellation) and far apart (alignment), added and
// subtracted. The reference is the double-precision sum rounded to F32; one
// ULP of difference is tolerated where double rounding can differ, and
// exact results (x - x = 0, x + 0) must match exactly.
module tb_fp_add;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  logic sub;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp_add dut (.a(a), .b(b), .sub(sub), .y(y));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_r;
    logic [31:0] ref_f;
    for (int i = 0; i < 30000; i++) begin
      a   = {1'($urandom), 8'(110 + $urandom_range(0, 30)), 23'($urandom)};
      b   = {1'($urandom), 8'((i % 2 == 1) ? 8'(a[30:23] - 8'($urandom_range(0, 2)))
                                      : 8'(110 + $urandom_range(0, 30))), 23'($urandom)};
      sub = 1'($urandom);
      #1;
      ref_r = sub ? f2r(a) - f2r(b) : f2r(a) + f2r(b);
      ref_f = r2f(ref_r);
      checks++;
      if (ulp_diff(y, ref_f) > 1) begin
        failures++;
        if (failures < 10) $display("FAIL %h %s %h = %h, expected %h", a, sub ? "-" : "+", b, y, ref_f);
      end
      @(posedge clk);
    end
    a = 32'h3e0a_3d71; b = 32'h3e0a_3d71; sub = 1'b1; #1;
    checks++; if (y !== 32'h0) failures++;
    a = 32'h3e0a_3d71; b = 32'h0; sub = 1'b0; #1;
    checks++; if (y !== 32'h3e0a_3d71) failures++;
    a = 32'h3f80_0000; b = 32'h3f80_0000; sub = 1'b0; #1;
    checks++; if (y !== 32'h4000_0000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
