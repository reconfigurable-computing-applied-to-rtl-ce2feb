// Self-checking testbench of fp_div: random quotients against the double
// quotient rounded to F32, bit for bit (a correctly rounded double quotient
// rounds to the correctly rounded F32 one), exact cases such as
// 1/2 and 6/3, division by zero giving infinity.
module tb_fp_div;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp_div dut (.a(a), .b(b), .y(y));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ref_f;
    for (int i = 0; i < 20000; i++) begin
      a = {1'($urandom), 8'(100 + $urandom_range(0, 54)), 23'($urandom)};
      b = {1'($urandom), 8'(100 + $urandom_range(0, 54)), 23'($urandom)};
      #1;
      ref_f = r2f(f2r(a) / f2r(b));
      checks++;
      if (y !== ref_f) begin
        failures++;
        if (failures < 10) $display("FAIL %h / %h = %h, expected %h", a, b, y, ref_f);
      end
      @(posedge clk);
    end
    a = 32'h3f80_0000; b = 32'h4000_0000; #1; checks++; if (y !== 32'h3f00_0000) failures++;
    a = 32'h40c0_0000; b = 32'h4040_0000; #1; checks++; if (y !== 32'h4000_0000) failures++;
    a = 32'h3f80_0000; b = 32'h0000_0000; #1; checks++; if (y !== 32'h7f80_0000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
