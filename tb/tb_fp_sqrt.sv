// Self-checking testbench of fp_sqrt: random positive radicands with odd and
// even exponents against the double root rounded to F32, bit for bit,
// exact squares (4 -> 2, 0.25 -> 0.5) bit for bit, zero and a
// negative input giving +0.
module tb_fp_sqrt;
  import fp_ref_pkg::*;

  logic [31:0] a, y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp_sqrt dut (.a(a), .y(y));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ref_f;
    for (int i = 0; i < 20000; i++) begin
      a = {1'b0, 8'(90 + $urandom_range(0, 74)), 23'($urandom)};
      #1;
      ref_f = r2f($sqrt(f2r(a)));
      checks++;
      if (y !== ref_f) begin
        failures++;
        if (failures < 10) $display("FAIL sqrt(%h) = %h, expected %h", a, y, ref_f);
      end
      @(posedge clk);
    end
    a = 32'h4080_0000; #1; checks++; if (y !== 32'h4000_0000) failures++;
    a = 32'h3e80_0000; #1; checks++; if (y !== 32'h3f00_0000) failures++;
    a = 32'h0000_0000; #1; checks++; if (y !== 32'h0000_0000) failures++;
    a = 32'hc080_0000; #1; checks++; if (y !== 32'h0000_0000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
